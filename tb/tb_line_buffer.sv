// tb_line_buffer: streams random tiles through the line buffer (with random
// input gaps) and compares every emitted 3x1 column with the column of the
// zero-padded tile built here: column (p, pc) must be rows p, p+1, p+2 of the
// padded tile at padded column pc.  Also checks the column count, that every
// input pixel is taken and that done follows the last column.
module tb_line_buffer;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, s_valid = 0;
  logic [DIM_W-1:0] cfg_w, cfg_h;
  pad_mode_t cfg_pad;
  word_t s_data;
  logic s_ready, out_valid, out_sol, busy, done;
  word_t out_col [3];
  int checks = 0, failures = 0;

  line_buffer #(.MAX_W(16)) dut (.*);

  word_t img [16][16];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int w, input int h, input pad_mode_t pd);
    int hp, wp, sent, got, dones;
    hp = h + pd.top + pd.bottom;  wp = w + pd.left + pd.right;
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) img[r][c] = {$urandom, $urandom};
    sent = 0; got = 0; dones = 0;
    cfg_w <= DIM_W'(w); cfg_h <= DIM_W'(h); cfg_pad <= pd; start <= 1;
    @(posedge clk); start <= 0;
    fork
      begin
        while (sent < w * h) begin
          s_valid <= ($urandom % 4) != 0;
          s_data  <= img[sent / w][sent % w];
          @(posedge clk);
          if (s_valid && s_ready) sent++;
        end
        s_valid <= 0;
      end
      begin
        while (dones == 0) begin
          @(posedge clk);
          if (done) dones++;
          if (out_valid) begin
            int p, pc;
            p = got / wp;  pc = got % wp;
            for (int k = 0; k < 3; k++) begin
              int r, c;  word_t e;
              r = p + k - pd.top;  c = pc - pd.left;
              e = (r >= 0 && r < h && c >= 0 && c < w) ? img[r][c] : '0;
              check(out_col[k] == e, $sformatf("col (%0d,%0d) tap %0d", p, pc, k));
            end
            check(out_sol == (pc == 0), "sol");
            got++;
          end
        end
      end
    join
    check(got == (hp - 2) * wp, $sformatf("%0d columns, expected %0d", got, (hp - 2) * wp));
    check(sent == w * h, "all pixels taken");
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_w = 0; cfg_h = 0; cfg_pad = '0; s_data = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    run(5, 4, '{1,1,1,1});
    run(16, 3, '{1,1,1,1});
    run(4, 6, '{0,0,0,0});
    run(7, 3, '{1,0,1,0});
    run(3, 5, '{0,1,1,1});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

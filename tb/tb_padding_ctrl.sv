// tb_padding_ctrl: checks the padding controller's schedule.
// For several tile sizes and padding modes it drives a stream valid signal
// with random gaps and checks, against the padded-map geometry worked out
// here, that every emitted column marks exactly the padding taps as zero,
// that the number of stream pixels taken and columns emitted are W*H and
// (Hp-2)*Wp, that FIFO k only pops when it holds a real row, and that done
// pulses once at the end.
module tb_padding_ctrl;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, in_valid = 0;
  logic [DIM_W-1:0] cfg_w, cfg_h;
  pad_mode_t cfg_pad;
  logic in_ready, out_valid, out_sol, busy, done;
  logic [2:0] push, pop, tap_zero;
  int checks = 0, failures = 0;

  padding_ctrl dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int w, input int h, input pad_mode_t pd);
    int hp, wp, taken, emitted, p, pc, dones;
    hp = h + pd.top + pd.bottom;  wp = w + pd.left + pd.right;
    taken = 0; emitted = 0; dones = 0;
    cfg_w <= DIM_W'(w); cfg_h <= DIM_W'(h); cfg_pad <= pd; start <= 1;
    @(posedge clk); start <= 0;
    while (busy || !dones) begin
      in_valid <= ($urandom % 3) != 0;
      @(negedge clk);
      if (in_ready) taken++;
      if (done) dones++;
      if (out_valid) begin
        p  = emitted / wp;  pc = emitted % wp;
        for (int k = 0; k < 3; k++) begin
          int r;  bit pad;
          r = p + 2 - k;   // FIFO 0 holds the bottom row of the window
          pad = (r < pd.top) || (r >= pd.top + h) || (pc < pd.left) || (pc >= pd.left + w);
          check(tap_zero[k] == pad, $sformatf("tap %0d at row %0d col %0d", k, p, pc));
          check(!pop[k] || !pad, "pop of a padding row");
        end
        check(out_sol == (pc == 0), "start of row flag");
        emitted++;
      end
      @(posedge clk);
      if (emitted > 10000) break;
    end
    check(taken == w * h, $sformatf("took %0d pixels, expected %0d", taken, w * h));
    check(emitted == (hp - 2) * wp, $sformatf("emitted %0d columns, expected %0d", emitted, (hp - 2) * wp));
    check(dones == 1, "done pulses");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_w = 0; cfg_h = 0; cfg_pad = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    run(5, 4, '{1,1,1,1});
    run(3, 6, '{0,0,0,0});
    run(6, 3, '{1,0,1,0});
    run(4, 5, '{0,1,0,1});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pooling: random raster maps (even and odd sizes, with input gaps) in
// max, average and bypass mode.  Outputs are compared with 2x2 / stride-2
// max and floor-average pooling of the map computed here (last odd row and
// column dropped), at their pooled raster addresses; in bypass every pixel
// must come out with its own address.
module tb_pooling;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pool_mode_e mode = POOL_NONE;
  logic start = 0;
  logic [DIM_W:0] cfg_w = 0;
  logic in_valid = 0;
  pix_t in_pix [NCH];
  logic [15:0] in_addr = 0;
  logic out_valid;
  pix_t out_pix [NCH];
  logic [15:0] out_addr;
  int checks = 0, failures = 0;

  pooling #(.MAX_W(16), .ADDR_W(16)) dut (.*);

  int img [12][12][NCH];
  typedef struct packed { logic [15:0] a; logic [NCH*8-1:0] p; } exp_t;
  exp_t exp_q [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      check(out_addr == e.a, $sformatf("addr %0d vs %0d", out_addr, e.a));
      for (int o = 0; o < NCH; o++) check(out_pix[o] == e.p[o*8 +: 8], $sformatf("pix %0d vs %0d", out_pix[o], $signed(e.p[o*8 +: 8])));
    end
  end

  task automatic run(input pool_mode_e m, input int w, input int h);
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) for (int o = 0; o < NCH; o++)
      img[r][c][o] = int'(pix_t'($urandom));
    if (m == POOL_NONE) begin
      for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) begin
        exp_t e;
        e.a = 16'(r * w + c);
        for (int o = 0; o < NCH; o++) e.p[o*8 +: 8] = 8'(img[r][c][o]);
        exp_q.push_back(e);
      end
    end else begin
      for (int r = 0; r < h / 2; r++) for (int c = 0; c < w / 2; c++) begin
        exp_t e;
        e.a = 16'(r * (w / 2) + c);
        for (int o = 0; o < NCH; o++) begin
          int mx, s;
          mx = -1000; s = 0;
          for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 2; dx++) begin
            int v;
            v = img[2*r+dy][2*c+dx][o];
            if (v > mx) mx = v;
            s += v;
          end
          e.p[o*8 +: 8] = 8'((m == POOL_MAX) ? mx : (s >>> 2));
        end
        exp_q.push_back(e);
      end
    end
    mode <= m; cfg_w <= (DIM_W+1)'(w); start <= 1;
    @(posedge clk); start <= 0;
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) begin
      while (($urandom % 4) == 0) begin in_valid <= 0; @(posedge clk); end
      in_valid <= 1; in_addr <= 16'(r * w + c);
      for (int o = 0; o < NCH; o++) in_pix[o] <= pix_t'(img[r][c][o]);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    check(exp_q.size() == 0, "all pooled pixels seen");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NCH; o++) in_pix[o] = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    run(POOL_MAX, 8, 6);
    run(POOL_AVG, 8, 4);
    run(POOL_MAX, 7, 5);
    run(POOL_AVG, 16, 3);
    run(POOL_NONE, 5, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

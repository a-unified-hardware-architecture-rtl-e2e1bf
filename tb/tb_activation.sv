// tb_activation: random pixels through all three modes, compared one cycle
// later with ReLU (negative -> 0), LeakyReLU (negative -> floor(x / 8)) and
// identity computed here.
module tb_activation;
  import cnn_pkg::*;
  localparam int N = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  act_mode_e mode = ACT_NONE;
  logic in_valid = 0;
  pix_t in_pix [NCH];
  logic [1:0] in_tag = 0;
  logic out_valid;
  pix_t out_pix [NCH];
  logic [1:0] out_tag;
  int checks = 0, failures = 0, n = 0;

  activation #(.TAG_W(2)) dut (.*);

  typedef struct packed { logic [1:0] tag; logic [NCH*8-1:0] p; } exp_t;
  exp_t exp_q [$];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always_ff @(posedge clk) begin
    in_valid <= 1'b0;
    if (rst_n && n < N) begin
      pix_t p [NCH];
      act_mode_e m;
      exp_t e;
      m = act_mode_e'(n % 3);
      for (int o = 0; o < NCH; o++) begin
        int x, y;
        p[o] = pix_t'($urandom);
        x = int'(p[o]);
        if (x >= 0 || m == ACT_NONE) y = x;
        else if (m == ACT_RELU) y = 0;
        else y = (x - 7) / 8;   // floor division for negative x
        e.p[o*8 +: 8] = 8'(y);
      end
      e.tag = 2'(n);
      exp_q.push_back(e);
      in_valid <= 1'b1; in_pix <= p; mode <= m; in_tag <= 2'(n);
      n <= n + 1;
    end
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      check(out_tag == e.tag, "tag");
      for (int o = 0; o < NCH; o++)
        check(out_pix[o] == e.p[o*8 +: 8], $sformatf("mode %0d: %0d vs %0d", mode, out_pix[o], $signed(e.p[o*8 +: 8])));
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NCH; o++) in_pix[o] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (n < N) @(posedge clk);
    repeat (5) @(posedge clk);
    check(exp_q.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_psum_buffer: random accesses (first or accumulate) to a small memory,
// including back-to-back accesses to the same entry, checked against a model
// memory kept here: every output must equal data (first) or the model entry
// plus data, two cycles after the input, with the tag.
module tb_psum_buffer;
  import cnn_pkg::*;
  localparam int D = 16, N = 600;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0;
  logic [3:0] in_addr = 0;
  logic signed [ACC_W-1:0] in_data [NCH];
  logic [1:0] in_tag = 0;
  logic out_valid;
  logic signed [ACC_W-1:0] out_data [NCH];
  logic [1:0] out_tag;
  int checks = 0, failures = 0;

  psum_buffer #(.DEPTH(D), .TAG_W(2)) dut (.*);

  int model [D][NCH];
  bit init [D];
  typedef struct packed { logic [1:0] tag; logic [NCH*ACC_W-1:0] d; } exp_t;
  exp_t exp_q [$];
  int n = 0, nsame = 0;
  logic [3:0] last_addr = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always_ff @(posedge clk) begin
    in_valid <= 1'b0;
    if (rst_n && n < N) begin
      if (($urandom % 4) != 0) begin
        logic [3:0] a;  logic f;  logic [1:0] t;  exp_t e;
        logic signed [ACC_W-1:0] d [NCH];
        a = (($urandom % 3) == 0) ? last_addr : 4'($urandom);
        f = !init[a] || (($urandom % 5) == 0);
        t = 2'($urandom);
        for (int o = 0; o < NCH; o++) d[o] = $signed(32'($urandom % 2001) - 32'd1000);
        for (int o = 0; o < NCH; o++) begin
          model[a][o] = (f ? 0 : model[a][o]) + d[o];
          e.d[o*ACC_W +: ACC_W] = model[a][o];
        end
        e.tag = t;
        exp_q.push_back(e);
        init[a] = 1;
        if (a == last_addr) nsame++;
        last_addr <= a;
        in_valid <= 1'b1; in_first <= f; in_addr <= a; in_tag <= t; in_data <= d;
        n <= n + 1;
      end
    end
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      check(out_tag == e.tag, "tag");
      for (int o = 0; o < NCH; o++)
        check(out_data[o] == e.d[o*ACC_W +: ACC_W], $sformatf("sum %0d vs %0d", out_data[o], $signed(e.d[o*ACC_W +: ACC_W])));
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NCH; o++) in_data[o] = '0;
    for (int a = 0; a < D; a++) init[a] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (N * 2 + 10) @(posedge clk);
    check(exp_q.size() == 0 && n == N, "all accesses done");
    check(nsame > 0, "back-to-back same entry exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

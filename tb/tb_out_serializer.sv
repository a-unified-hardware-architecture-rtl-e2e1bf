// tb_out_serializer: convolution inputs must come out one cycle later
// unchanged (lane 0, same address and tag); each deconvolution input must
// come out as four pixels on four consecutive cycles, lanes 0..3 at
// addresses a, a+1, a+row_w, a+row_w+1.
module tb_out_serializer;
  import cnn_pkg::*;
  localparam int N = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  op_mode_e mode = MODE_CONV;
  logic [15:0] row_w = 16'd20;
  logic in_valid = 0;
  logic signed [ACC_W-1:0] in_data [NCH][4];
  logic [15:0] in_addr = 0;
  logic [1:0] in_tag = 0;
  logic out_valid;
  logic signed [ACC_W-1:0] out_data [NCH];
  logic [15:0] out_addr;
  logic [1:0] out_tag;
  int checks = 0, failures = 0;

  out_serializer #(.ADDR_W(16), .TAG_W(2)) dut (.*);

  typedef struct packed { logic [15:0] addr; logic [1:0] tag; logic [NCH*ACC_W-1:0] d; } exp_t;
  exp_t exp_q [$];
  int cyc = 0, n = 0, gap = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // conv inputs every cycle for N/2 inputs, then deconv inputs every 4 cycles
  always_ff @(posedge clk) begin
    in_valid <= 1'b0;
    if (rst_n && n < N) begin
      if (n < N/2 || gap == 3) begin
        logic signed [ACC_W-1:0] d [NCH][4];
        logic [15:0] a;
        logic [1:0] t;
        a = 16'($urandom % 1000);  t = 2'($urandom);
        for (int o = 0; o < NCH; o++) for (int l = 0; l < 4; l++) d[o][l] = $urandom;
        in_valid <= 1'b1;  in_addr <= a;  in_tag <= t;  in_data <= d;
        mode <= (n < N/2) ? MODE_CONV : MODE_DECONV;
        for (int l = 0; l < ((n < N/2) ? 1 : 4); l++) begin
          exp_t e;
          e.addr = a + ((l % 2) ? 16'd1 : 16'd0) + ((l / 2) ? row_w : 16'd0);
          e.tag = t;
          for (int o = 0; o < NCH; o++) e.d[o*ACC_W +: ACC_W] = d[o][l];
          exp_q.push_back(e);
        end
        n <= n + 1;
        gap <= 0;
      end else gap <= gap + 1;
    end
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    if (exp_q.size() == 0) check(0, "unexpected output");
    else begin
      e = exp_q.pop_front();
      check(out_addr == e.addr, $sformatf("addr %0d vs %0d", out_addr, e.addr));
      check(out_tag == e.tag, "tag");
      for (int o = 0; o < NCH; o++) check(out_data[o] == e.d[o*ACC_W +: ACC_W], "data");
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NCH; o++) for (int l = 0; l < 4; l++) in_data[o][l] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (N * 5 + 10) @(posedge clk);
    check(exp_q.size() == 0 && n == N, "all pixels out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_weight_buffer: writes random parameter words, loads two different
// weight / batch-norm sets and checks every weight against the byte layout
// (byte n = (o*8 + i)*9 + k of the set, byte 0 in bits 7:0 of word 0), every
// scale and bias against theirs, and that done comes 81 cycles after the
// load cycle (78 reads, the memory latency and the final register).
module tb_weight_buffer;
  import cnn_pkg::*;
  localparam int D = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, load = 0, busy, done;
  logic [7:0] wr_addr = 0, w_base = 0, bn_base = 0;
  word_t wr_data = '0;
  pix_t weight [NCH][NCH][KTAPS];
  logic signed [BNS_W-1:0] bn_scale [NCH];
  logic signed [BNB_W-1:0] bn_bias [NCH];
  word_t mem [D];
  int checks = 0, failures = 0;

  weight_buffer #(.DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic do_load(input int wb, input int bb);
    int cyc;
    load <= 1; w_base <= 8'(wb); bn_base <= 8'(bb);
    @(posedge clk); load <= 0;
    cyc = 1;
    while (!done) begin @(posedge clk); cyc++; end
    check(cyc == 81, $sformatf("load took %0d cycles", cyc));
    @(negedge clk);
    for (int o = 0; o < 8; o++) begin
      for (int i = 0; i < 8; i++)
        for (int k = 0; k < 9; k++) begin
          int n;
          n = (o*8 + i)*9 + k;
          check(weight[o][i][k] == mem[wb + n/8][(n%8)*8 +: 8], $sformatf("w[%0d][%0d][%0d]", o, i, k));
        end
      check(bn_scale[o] == mem[bb + o/4][(o%4)*16 +: 16], "scale");
      check(bn_bias[o] == mem[bb + 2 + o/2][(o%2)*32 +: 32], "bias");
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int a = 0; a < D; a++) begin
      mem[a] = {$urandom, $urandom};
      wr_en <= 1; wr_addr <= 8'(a); wr_data <= mem[a];
      @(posedge clk);
    end
    wr_en <= 0;
    do_load(0, 144);
    do_load(72, 150);
    do_load(100, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

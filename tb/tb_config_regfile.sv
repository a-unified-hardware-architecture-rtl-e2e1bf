// tb_config_regfile: writes random descriptors to every entry in scrambled
// order and reads all of them back, field by field through cnn_pkg::job_t.
module tb_config_regfile;
  import cnn_pkg::*;
  localparam int NJ = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [63:0] wdata = 0;
  job_t rdata;
  logic [63:0] model [NJ];
  int checks = 0, failures = 0;

  config_regfile #(.NJOBS(NJ)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int round = 0; round < 2; round++) begin
      for (int n = 0; n < NJ; n++) begin
        int a;
        a = (n * 5 + round) % NJ;
        model[a] = {$urandom, $urandom};
        we <= 1; waddr <= 4'(a); wdata <= model[a];
        @(posedge clk);
      end
      we <= 0;
      @(posedge clk);
      for (int a = 0; a < NJ; a++) begin
        job_t e;
        raddr <= 4'(a);
        @(negedge clk);
        e = job_t'(model[a]);
        check(rdata == e, $sformatf("entry %0d", a));
        check(rdata.in_w == e.in_w && rdata.mode == e.mode && rdata.pad == e.pad, "fields");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

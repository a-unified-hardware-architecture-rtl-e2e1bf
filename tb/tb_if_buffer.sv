// tb_if_buffer: fills bank 0, commits it, fills bank 1 while reading bank 0
// back, checks that the writer is held off when both banks are full and the
// reader when both are empty, and that every read returns what was written
// to that bank, one cycle after the read.
module tb_if_buffer;
  import cnn_pkg::*;
  localparam int D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_commit = 0, rd_en = 0, rd_release = 0, wr_ready, rd_ready;
  logic [4:0] wr_addr = 0, rd_addr = 0;
  word_t wr_data [3];
  word_t rd_data [3];
  int checks = 0, failures = 0;
  word_t ref0 [D][3];
  word_t ref1 [D][3];

  if_buffer #(.DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  task automatic fill(input int b);
    for (int a = 0; a < D; a++) begin
      for (int k = 0; k < 3; k++) begin
        wr_data[k] <= {$urandom, $urandom};
      end
      wr_en <= 1; wr_addr <= 5'(a);
      @(posedge clk);
      for (int k = 0; k < 3; k++) if (b == 0) ref0[a][k] = wr_data[k]; else ref1[a][k] = wr_data[k];
    end
    wr_en <= 0; wr_commit <= 1; @(posedge clk); wr_commit <= 0; @(posedge clk);
  endtask

  task automatic drain(input int b);
    for (int a = 0; a < D; a++) begin
      rd_en <= 1; rd_addr <= 5'(a);
      @(posedge clk); rd_en <= 0;
      @(negedge clk);
      for (int k = 0; k < 3; k++)
        check(rd_data[k] == ((b == 0) ? ref0[a][k] : ref1[a][k]), $sformatf("bank %0d addr %0d", b, a));
    end
    rd_release <= 1; @(posedge clk); rd_release <= 0; @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3; k++) wr_data[k] = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    check(wr_ready && !rd_ready, "initially writable, not readable");
    fill(0);
    check(wr_ready && rd_ready, "one bank full");
    fill(1);
    check(!wr_ready && rd_ready, "both banks full");
    drain(0);
    check(wr_ready && rd_ready, "bank 0 free again");
    fill(0);
    drain(1);
    drain(0);
    check(wr_ready && !rd_ready, "both banks empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_of_buffer: writes random words in scrambled address order, drains a
// count of them under random back-pressure and checks order, data, m_last
// on the final word only, data held stable while stalled, and done.  Then a
// second drain of a different count.
module tb_of_buffer;
  import cnn_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [5:0] wr_addr = 0;
  pix_t wr_pix [NCH];
  logic start = 0;
  logic [6:0] count = 0;
  word_t m_data;
  logic m_valid, m_last, m_ready, busy, done;
  int checks = 0, failures = 0;
  word_t ref_mem [D];

  of_buffer #(.DEPTH(D)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always_ff @(posedge clk) m_ready <= ($urandom % 3) != 0;

  task automatic drain(input int cnt);
    int got, dones;
    got = 0; dones = 0;
    count <= 7'(cnt); start <= 1; @(posedge clk); start <= 0;
    while (dones == 0) begin
      @(negedge clk);
      if (m_valid && m_ready) begin
        check(m_data == ref_mem[got], $sformatf("word %0d", got));
        check(m_last == (got == cnt - 1), "last");
        got++;
      end
      @(posedge clk);
      if (done) dones++;
    end
    check(got == cnt, $sformatf("%0d words, expected %0d", got, cnt));
    check(!busy, "idle after drain");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int o = 0; o < NCH; o++) wr_pix[o] = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int n = 0; n < D; n++) begin
      int a;
      a = (n * 37) % D;
      ref_mem[a] = {$urandom, $urandom};
      wr_en <= 1; wr_addr <= 6'(a);
      for (int o = 0; o < NCH; o++) wr_pix[o] <= ref_mem[a][o*8 +: 8];
      @(posedge clk);
    end
    wr_en <= 0;
    drain(D);
    drain(13);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

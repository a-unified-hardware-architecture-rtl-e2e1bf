// tb_window_shift_reg: feeds rows of random 3x1 columns with gaps and checks
// that a window appears one cycle after each third-or-later column of a row,
// holding the last three columns in order (oldest on the left), and that no
// window spans two rows.
module tb_window_shift_reg;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_sol = 0, out_valid;
  word_t in_col [3];
  word_t win [3][3];
  word_t hist [$][3];
  int checks = 0, failures = 0, nwin = 0, expwin = 0;

  window_shift_reg dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 3; k++) in_col[k] = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int row = 0; row < 4; row++) begin
      int wp;
      wp = 3 + row * 2;
      hist.delete();
      for (int c = 0; c < wp; c++) begin
        word_t col [3];
        while (($urandom % 3) == 0) begin
          in_valid <= 0; @(posedge clk); @(negedge clk);
          check(!out_valid, "no window without a column");
        end
        for (int k = 0; k < 3; k++) col[k] = {$urandom, $urandom};
        in_valid <= 1; in_sol <= (c == 0);
        for (int k = 0; k < 3; k++) in_col[k] <= col[k];
        hist.push_back(col);
        @(posedge clk); in_valid <= 0;
        @(negedge clk);
        check(out_valid == (c >= 2), $sformatf("out_valid row %0d col %0d", row, c));
        if (c >= 2) begin
          expwin++;
          if (out_valid) nwin++;
          for (int r = 0; r < 3; r++)
            for (int x = 0; x < 3; x++)
              check(win[r][x] == hist[c - 2 + x][r], $sformatf("win[%0d][%0d]", r, x));
        end
      end
    end
    check(nwin == expwin, "window count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

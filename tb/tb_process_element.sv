// tb_process_element: random windows and kernels in both modes, one per
// cycle, compared two cycles later with the convolution dot product and with
// the deconvolution equations written out here:
//   OF11 = a*K11 + b*K13 + c*K31 + d*K33, OF12 = b*K12 + d*K32,
//   OF21 = c*K21 + d*K23, OF22 = d*K22  (a, b / c, d = 2x2 patch).
module tb_process_element;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  op_mode_e mode = MODE_CONV;
  logic in_valid = 0;
  logic out_valid;
  pix_t win [3][3];
  pix_t w [KTAPS];
  logic signed [PE_W-1:0] q [4];
  int checks = 0, failures = 0;
  typedef struct packed { int m; int q0; int q1; int q2; int q3; } exp_t;
  exp_t exp_q [$];

  process_element dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      exp_t e;
      if (exp_q.size() == 0) check(0, "unexpected output");
      else begin
        e = exp_q.pop_front();
        check(q[0] == e.q0, $sformatf("q0 %0d vs %0d", q[0], e.q0));
        if (e.m == 1) begin
          check(q[1] == e.q1, "OF12");
          check(q[2] == e.q2, "OF21");
          check(q[3] == e.q3, "OF22");
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int N = 400;
  pix_t     st_win [N][3][3];
  pix_t     st_w   [N][9];
  op_mode_e st_m   [N];
  int       idx = 0;

  // stimulus: one input per cycle, with an idle cycle after every fifth
  always_ff @(posedge clk) begin
    if (rst_n && idx < N + N/5) begin
      idx <= idx + 1;
      in_valid <= 1'b0;
      if (idx % 6 != 5) begin
        int n;
        n = idx - idx / 6;
        if (n < N) begin
          in_valid <= 1'b1;
          mode <= st_m[n];
          for (int r = 0; r < 3; r++) for (int x = 0; x < 3; x++) win[r][x] <= st_win[n][r][x];
          for (int k = 0; k < 9; k++) w[k] <= st_w[n][k];
        end
      end
    end else begin
      in_valid <= 1'b0;
    end
  end

  initial begin
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] = '0;
    for (int k = 0; k < 9; k++) w[k] = '0;
    for (int n = 0; n < N; n++) begin
      exp_t e;
      int a, b, c, d, s;
      st_m[n] = (n % 3 == 0) ? MODE_DECONV : MODE_CONV;
      for (int r = 0; r < 3; r++) for (int x = 0; x < 3; x++) st_win[n][r][x] = pix_t'($urandom);
      for (int k = 0; k < 9; k++) st_w[n][k] = pix_t'($urandom);
      if (n < 4) begin  // extremes
        for (int r = 0; r < 3; r++) for (int x = 0; x < 3; x++) st_win[n][r][x] = -128;
        for (int k = 0; k < 9; k++) st_w[n][k] = (n % 2) ? -128 : 127;
      end
      s = 0;
      for (int k = 0; k < 9; k++) s += int'(st_win[n][k/3][k%3]) * int'(st_w[n][k]);
      a = st_win[n][0][0]; b = st_win[n][0][1]; c = st_win[n][1][0]; d = st_win[n][1][1];
      e.m = (st_m[n] == MODE_DECONV) ? 1 : 0;
      if (st_m[n] == MODE_CONV) e.q0 = s;
      else e.q0 = a*st_w[n][0] + b*st_w[n][2] + c*st_w[n][6] + d*st_w[n][8];
      e.q1 = b*st_w[n][1] + d*st_w[n][7];
      e.q2 = c*st_w[n][3] + d*st_w[n][5];
      e.q3 = d*st_w[n][4];
      exp_q.push_back(e);
    end
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (N + N/5 + 10) @(posedge clk);
    check(exp_q.size() == 0, "all results seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

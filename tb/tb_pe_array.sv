// tb_pe_array: random 8-channel windows and 8 x 8 x 9 kernels in both modes.
// Each result is compared three cycles later with sums worked out here:
// convolution, out[o] = sum over i, ky, kx of win[ky][kx][i] * K[o][i][ky][kx];
// deconvolution, the four pixels of each output channel from the 2x2 patch
// of every input channel, summed over input channels.
module tb_pe_array;
  import cnn_pkg::*;
  localparam int N = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  op_mode_e mode = MODE_CONV;
  logic in_valid = 0;
  logic out_valid;
  word_t win [3][3];
  pix_t weight [NCH][NCH][KTAPS];
  logic signed [ACC_W-1:0] sum [NCH][4];
  int checks = 0, failures = 0;

  pe_array dut (.*);

  word_t    st_win [N][3][3];
  pix_t     st_w   [N][NCH][NCH][KTAPS];
  op_mode_e st_m   [N];
  int       ex     [N][NCH][4];
  int       idx = 0, oidx = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  always_ff @(posedge clk) begin
    if (rst_n && idx < N + N / 2) begin
      idx <= idx + 1;
      in_valid <= 1'b0;
      // first half of the inputs every other cycle, the rest back to back
      if (idx % 2 == 0 || idx >= N) begin
        int n;
        n = (idx < N) ? idx / 2 : idx - N / 2;
        if (n < N) begin
          in_valid <= 1'b1;
          mode <= st_m[n];
          for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] <= st_win[n][r][c];
          weight <= st_w[n];
        end
      end
    end else begin
      in_valid <= 1'b0;
    end
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    if (oidx >= N) check(0, "extra output");
    else begin
      for (int o = 0; o < NCH; o++) begin
        check(sum[o][0] == ex[oidx][o][0], $sformatf("n %0d o %0d lane 0: %0d vs %0d", oidx, o, sum[o][0], ex[oidx][o][0]));
        if (st_m[oidx] == MODE_DECONV)
          for (int l = 1; l < 4; l++) check(sum[o][l] == ex[oidx][o][l], $sformatf("n %0d o %0d lane %0d", oidx, o, l));
      end
    end
    oidx++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win[r][c] = '0;
    for (int o = 0; o < NCH; o++) for (int i = 0; i < NCH; i++) for (int k = 0; k < 9; k++) weight[o][i][k] = '0;
    for (int n = 0; n < N; n++) begin
      st_m[n] = (n % 2) ? MODE_DECONV : MODE_CONV;
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) st_win[n][r][c] = {$urandom, $urandom};
      for (int o = 0; o < NCH; o++) for (int i = 0; i < NCH; i++) for (int k = 0; k < 9; k++)
        st_w[n][o][i][k] = pix_t'($urandom);
      for (int o = 0; o < NCH; o++) begin
        for (int l = 0; l < 4; l++) ex[n][o][l] = 0;
        for (int i = 0; i < NCH; i++) begin
          int px [3][3];
          int kk [3][3];
          for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) begin
            px[r][c] = int'($signed(st_win[n][r][c][i*8 +: 8]));
            kk[r][c] = int'(st_w[n][o][i][r*3 + c]);
          end
          if (st_m[n] == MODE_CONV) begin
            for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) ex[n][o][0] += px[r][c] * kk[r][c];
          end else begin
            ex[n][o][0] += px[0][0]*kk[0][0] + px[0][1]*kk[0][2] + px[1][0]*kk[2][0] + px[1][1]*kk[2][2];
            ex[n][o][1] += px[0][1]*kk[0][1] + px[1][1]*kk[2][1];
            ex[n][o][2] += px[1][0]*kk[1][0] + px[1][1]*kk[1][2];
            ex[n][o][3] += px[1][1]*kk[1][1];
          end
        end
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    repeat (2 * N + 10) @(posedge clk);
    check(oidx == N, $sformatf("%0d results, expected %0d", oidx, N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_latency_workload: a convolution layer followed by a deconvolution layer
// at full feature-map size, run through the accelerator at its default sizes.
//
// Layer 1 is a 3x3 convolution (zero padding on all sides) of a 90 x 120 map
// of 8 channels, with batch norm, ReLU and 2x2 max pooling, giving 45 x 60.
// Layer 2 is a 3x3, stride-2 deconvolution of that 45 x 60 result back to
// 90 x 120.  Neither map fits one IF buffer bank, so the layers run as
// horizontal strips, each strip a job that carries its halo rows:
//  - convolution: output rows 0-15, 16-31, ..., 64-79 and 80-89 (even
//    heights, so pooling never drops a row); input rows one above and one
//    below each strip, padded on top for the first strip and at the bottom
//    for the last, left and right for all;
//  - deconvolution: input rows 0-22 padded on all sides, then rows 22-44
//    padded left, right and bottom (the first row is the halo).
// The expected output is computed for the whole maps at once, without any
// strips, so the test also shows that the strips join up seamlessly.  The
// deconvolution input is the convolution layer's expected output.
// The test checks every output word, the PE-array run time of every strip
// (one column per cycle for convolution, one per four cycles for
// deconvolution) and prints the run time of each layer and the total cycle
// count with full-rate streams.  The two layers need about the same
// PE-array time: 90 x 122 columns against 4 x 45 x 62.
module tb_latency_workload;
  import cnn_pkg::*;

  localparam int H = 90, W = 120;          // convolution input
  localparam int H2 = H / 2, W2 = W / 2;   // after pooling, deconvolution input
  localparam int NCONV = 6, NDEC = 2, NJ = NCONV + NDEC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0;
  logic [5:0]  cfg_waddr = 0;
  logic [63:0] cfg_wdata = 0;
  logic        start = 0;
  logic [6:0]  n_jobs = 0;
  logic        busy, done;
  word_t       s_tdata;
  logic        s_tvalid, s_tready;
  word_t       m_tdata;
  logic        m_tvalid, m_tlast, m_tready;

  accel_top dut (
    .clk, .rst_n, .cfg_we, .cfg_waddr, .cfg_wdata, .start, .n_jobs, .busy, .done,
    .s_axis_tdata (s_tdata), .s_axis_tvalid (s_tvalid), .s_axis_tready (s_tready),
    .m_axis_tdata (m_tdata), .m_axis_tvalid (m_tvalid), .m_axis_tlast (m_tlast),
    .m_axis_tready (m_tready)
  );

  int checks = 0, failures = 0;
  job_t jobs [NJ];
  int   r0 [NJ];        // first input row of each strip
  int   exp_run [NJ];

  word_t in_q [$];
  word_t exp_q [$];
  int    exp_last [$];

  int IN [8][H][W];
  int KC [8][8][9], KD [8][8][9];
  int SCC[8], BIC[8], SCD[8], BID[8];
  int Y1 [8][H][W];      // conv + BN + ReLU
  int G  [8][H2][W2];    // pooled
  int D  [8][H][W];      // deconv + BN

  function automatic int srand(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int sat8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic word_t pack8(input int v [8]);
    word_t w;
    for (int l = 0; l < 8; l++) w[l*8 +: 8] = 8'(v[l]);
    return w;
  endfunction

  task automatic push_params(input bit deconv);
    word_t w;
    int n;
    for (int wd = 0; wd < 72; wd++) begin
      for (int l = 0; l < 8; l++) begin
        n = wd * 8 + l;
        w[l*8 +: 8] = 8'(deconv ? KD[n/72][(n%72)/9][n%9] : KC[n/72][(n%72)/9][n%9]);
      end
      in_q.push_back(w);
    end
    for (int wd = 0; wd < 2; wd++) begin
      for (int l = 0; l < 4; l++) w[l*16 +: 16] = 16'(deconv ? SCD[wd*4 + l] : SCC[wd*4 + l]);
      in_q.push_back(w);
    end
    for (int wd = 0; wd < 4; wd++) begin
      for (int l = 0; l < 2; l++) w[l*32 +: 32] = 32'(deconv ? BID[wd*2 + l] : BIC[wd*2 + l]);
      in_q.push_back(w);
    end
  endtask

  // whole-map reference model and the strip jobs
  task automatic build();
    int v [8];
    int hp, wp, ho, n, orow0, orow1;
    for (int c = 0; c < 8; c++)
      for (int r = 0; r < H; r++)
        for (int x = 0; x < W; x++) IN[c][r][x] = srand(-20, 20);
    for (int o = 0; o < 8; o++) begin
      for (int i = 0; i < 8; i++)
        for (int k = 0; k < 9; k++) begin
          KC[o][i][k] = srand(-12, 12);
          KD[o][i][k] = srand(-12, 12);
        end
      SCC[o] = srand(-300, 300);  BIC[o] = srand(-20000, 20000);
      SCD[o] = srand(-200, 200);  BID[o] = srand(-20000, 20000);
    end
    // layer 1: convolution over the zero-padded map, BN, ReLU
    for (int o = 0; o < 8; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint s;
          s = 0;
          for (int i = 0; i < 8; i++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int u, vv;
                u = y + ky - 1;  vv = x + kx - 1;
                if (u >= 0 && u < H && vv >= 0 && vv < W)
                  s += longint'(IN[i][u][vv]) * KC[o][i][ky*3 + kx];
              end
          Y1[o][y][x] = sat8((s * SCC[o] + BIC[o]) >>> 12);
          if (Y1[o][y][x] < 0) Y1[o][y][x] = 0;
        end
    for (int o = 0; o < 8; o++)
      for (int y = 0; y < H2; y++)
        for (int x = 0; x < W2; x++) begin
          int m;
          m = Y1[o][2*y][2*x];
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (Y1[o][2*y+dy][2*x+dx] > m) m = Y1[o][2*y+dy][2*x+dx];
          G[o][y][x] = m;
        end
    // layer 2: deconvolution = correlation over the zero-inserted map, in
    // which pixel (r, c) of the padded input sits at (2r, 2c); BN, no activation
    for (int o = 0; o < 8; o++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint s;
          s = 0;
          for (int i = 0; i < 8; i++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int u, vv, pr, pc;
                u = y + ky;  vv = x + kx;
                pr = u / 2 - 1;  pc = vv / 2 - 1;
                if (u % 2 == 0 && vv % 2 == 0 && pr >= 0 && pr < H2 && pc >= 0 && pc < W2)
                  s += longint'(G[i][pr][pc]) * KD[o][i][ky*3 + kx];
              end
          D[o][y][x] = sat8((s * SCD[o] + BID[o]) >>> 14);
        end

    // convolution strips
    for (int j = 0; j < NCONV; j++) begin
      orow0 = 16 * j;
      orow1 = (j == NCONV - 1) ? H - 1 : orow0 + 15;
      jobs[j] = '0;
      jobs[j].mode = MODE_CONV;
      jobs[j].pad.top    = (j == 0);
      jobs[j].pad.bottom = (j == NCONV - 1);
      jobs[j].pad.left   = 1'b1;
      jobs[j].pad.right  = 1'b1;
      r0[j] = (j == 0) ? 0 : orow0 - 1;
      jobs[j].in_h = 10'(((j == NCONV - 1) ? H - 1 : orow1 + 1) - r0[j] + 1);
      jobs[j].in_w = 10'(W);
      jobs[j].ci_groups = 5'd1;  jobs[j].co_groups = 5'd1;
      jobs[j].act = ACT_RELU;  jobs[j].pool = POOL_MAX;  jobs[j].bn_shift = 5'd12;
      push_params(1'b0);
      for (int r = 0; r < jobs[j].in_h; r++)
        for (int x = 0; x < W; x++) begin
          for (int l = 0; l < 8; l++) v[l] = IN[l][r0[j] + r][x];
          in_q.push_back(pack8(v));
        end
      for (int y = orow0 / 2; y <= orow1 / 2; y++)
        for (int x = 0; x < W2; x++) begin
          for (int l = 0; l < 8; l++) v[l] = G[l][y][x];
          exp_q.push_back(pack8(v));
          exp_last.push_back(0);
        end
      exp_last[exp_last.size() - 1] = 1;
      hp = jobs[j].in_h + jobs[j].pad.top + jobs[j].pad.bottom;
      exp_run[j] = (hp - 2) * (W + 2);
    end
    // deconvolution strips
    for (int k = 0; k < NDEC; k++) begin
      int j;
      j = NCONV + k;
      jobs[j] = '0;
      jobs[j].mode = MODE_DECONV;
      jobs[j].pad.top    = (k == 0);
      jobs[j].pad.bottom = 1'b1;
      jobs[j].pad.left   = 1'b1;
      jobs[j].pad.right  = 1'b1;
      r0[j] = (k == 0) ? 0 : 22;
      jobs[j].in_h = 10'((k == 0) ? 23 : H2 - 22);
      jobs[j].in_w = 10'(W2);
      jobs[j].ci_groups = 5'd1;  jobs[j].co_groups = 5'd1;
      jobs[j].act = ACT_NONE;  jobs[j].pool = POOL_NONE;  jobs[j].bn_shift = 5'd14;
      push_params(1'b1);
      for (int r = 0; r < jobs[j].in_h; r++)
        for (int x = 0; x < W2; x++) begin
          for (int l = 0; l < 8; l++) v[l] = G[l][r0[j] + r][x];
          in_q.push_back(pack8(v));
        end
      hp = jobs[j].in_h + jobs[j].pad.top + jobs[j].pad.bottom;
      ho = hp - 2;
      // output block rows of this strip: global block rows (r0 + top pad - 1 + ...)
      orow0 = (k == 0) ? 0 : 2 * 23;
      for (int y = orow0; y < orow0 + 2 * ho; y++)
        for (int x = 0; x < W; x++) begin
          for (int l = 0; l < 8; l++) v[l] = D[l][y][x];
          exp_q.push_back(pack8(v));
          exp_last.push_back(0);
        end
      exp_last[exp_last.size() - 1] = 1;
      n = ho * (W2 + 2);
      exp_run[j] = 4 * (n - 1) + 1;
    end
  endtask

  // ---------------------------------------------------------- full-rate streams
  int in_idx = 0;
  always_ff @(posedge clk) if (s_tvalid && s_tready) in_idx <= in_idx + 1;
  assign s_tvalid = rst_n && (in_idx < in_q.size());
  assign s_tdata  = (in_idx < in_q.size()) ? in_q[in_idx] : '0;
  assign m_tready = 1'b1;

  int out_idx = 0;
  always_ff @(posedge clk) begin
    if (rst_n && m_tvalid && m_tready) begin
      checks++;
      if (out_idx >= exp_q.size()) begin
        failures++;
        $display("FAIL: unexpected output word %0d", out_idx);
      end else if (m_tdata !== exp_q[out_idx] || int'(m_tlast) != exp_last[out_idx]) begin
        failures++;
        if (failures < 10)
          $display("FAIL: word %0d got %h last %0d, expected %h last %0d",
                   out_idx, m_tdata, m_tlast, exp_q[out_idx], exp_last[out_idx]);
      end
      out_idx <= out_idx + 1;
    end
  end

  int run_cyc [NJ];
  int total_cyc = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.m_st == dut.u_ctrl.M_RUN) run_cyc[dut.u_ctrl.jidx]++;
    if (busy) total_cyc++;
  end

  // ---------------------------------------------------------- watchdog
  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int conv_run, dec_run;
    build();
    for (int j = 0; j < NJ; j++) run_cyc[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int j = 0; j < NJ; j++) begin
      cfg_we <= 1; cfg_waddr <= 6'(j); cfg_wdata <= 64'(jobs[j]);
      @(posedge clk);
    end
    cfg_we <= 0;
    n_jobs <= 7'(NJ);
    start  <= 1;
    @(posedge clk);
    start  <= 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    repeat (5) @(posedge clk);

    checks++;
    if (out_idx != exp_q.size()) begin
      failures++;
      $display("FAIL: %0d output words, expected %0d", out_idx, exp_q.size());
    end
    checks++;
    if (in_idx != in_q.size()) begin
      failures++;
      $display("FAIL: %0d input words taken, expected %0d", in_idx, in_q.size());
    end
    conv_run = 0;  dec_run = 0;
    for (int j = 0; j < NJ; j++) begin
      checks++;
      if (run_cyc[j] != exp_run[j]) begin
        failures++;
        $display("FAIL: strip %0d PE-array run time %0d cycles, expected %0d", j, run_cyc[j], exp_run[j]);
      end
      if (j < NCONV) conv_run += run_cyc[j]; else dec_run += run_cyc[j];
    end
    $display("convolution 90x120 (6 strips): %0d PE-array cycles", conv_run);
    $display("deconvolution 45x60 (2 strips): %0d PE-array cycles", dec_run);
    $display("total busy cycles, both layers with transfers: %0d", total_cyc);
    // the two layers should take about the same PE-array time (within 5 %)
    checks++;
    if (dec_run * 100 > conv_run * 105 || dec_run * 100 < conv_run * 95) begin
      failures++;
      $display("FAIL: deconvolution and convolution run times differ by more than 5%%");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

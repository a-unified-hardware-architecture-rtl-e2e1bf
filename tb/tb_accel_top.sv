// tb_accel_top: end-to-end test of the accelerator at its default sizes.
//
// Runs five jobs back to back from the job register file: convolution with
// full padding, two input and two output channel groups, ReLU and max
// pooling; deconvolution with full padding and LeakyReLU; a convolution of a
// middle strip (no padding) with average pooling; a top strip (top, left and
// right padding) with three input groups; and a deconvolution padded on top
// and left only.  Inputs, kernels and batch-norm parameters are random.
// The expected output is computed here from the textbook definitions: direct
// 3x3 correlation over the zero-padded tile for convolution and, for
// deconvolution, correlation over the zero-inserted map (input pixel (r, c)
// of the padded tile placed at (2r, 2c)), followed by the same integer
// batch-norm, activation and pooling rules.  The input stream has random
// gaps and the output stream random back-pressure.  The test also checks the
// PE-array run time of each job (one window column per cycle for
// convolution, one per four cycles for deconvolution) and counts how often
// each mechanism occurred: zero padding, input stall, output stall, both IF
// banks in use, partial-sum accumulation, each activation and pooling mode,
// saturation, and both PE modes.
module tb_accel_top;
  import cnn_pkg::*;

  localparam int NJ = 5;
  localparam int MAXC = 32, MAXR = 12;

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
  int n_sat_ref = 0;
  job_t jobs [NJ];

  // stimulus and expected words, built per job
  word_t in_q [$];
  word_t exp_q [$];
  int    exp_last [$];
  int    exp_run [NJ];

  int F  [MAXC][MAXR][MAXR];     // input tile per input channel
  int P  [MAXC][MAXR][MAXR];     // padded tile
  int K  [MAXC][MAXC][9];        // [o][i][k]
  int SC [MAXC];
  int BI [MAXC];
  int ACC[MAXC][2*MAXR][2*MAXR];
  int Y  [MAXC][2*MAXR][2*MAXR];

  function automatic int srand(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic int sat8(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  task automatic build_job(input int j);
    job_t jb;
    int ci, co, hp, wp, ho, wo, oh, ow, n;
    logic [63:0] w;
    jb = jobs[j];
    ci = jb.ci_groups * 8;  co = jb.co_groups * 8;
    hp = jb.in_h + jb.pad.top + jb.pad.bottom;
    wp = jb.in_w + jb.pad.left + jb.pad.right;
    ho = hp - 2;  wo = wp - 2;
    // random data
    for (int c = 0; c < ci; c++)
      for (int r = 0; r < jb.in_h; r++)
        for (int x = 0; x < jb.in_w; x++) F[c][r][x] = srand(-20, 20);
    for (int o = 0; o < co; o++) begin
      for (int i = 0; i < ci; i++)
        for (int k = 0; k < 9; k++) K[o][i][k] = srand(-12, 12);
      SC[o] = srand(-300, 300);
      BI[o] = srand(-20000, 20000);
    end
    // parameter words
    for (int gi = 0; gi < jb.ci_groups; gi++)
      for (int go = 0; go < jb.co_groups; go++)
        for (int wd = 0; wd < 72; wd++) begin
          for (int l = 0; l < 8; l++) begin
            n = wd * 8 + l;
            w[l*8 +: 8] = 8'(K[go*8 + n/72][gi*8 + (n%72)/9][n%9]);
          end
          in_q.push_back(w);
        end
    for (int go = 0; go < jb.co_groups; go++) begin
      for (int wd = 0; wd < 2; wd++) begin
        for (int l = 0; l < 4; l++) w[l*16 +: 16] = 16'(SC[go*8 + wd*4 + l]);
        in_q.push_back(w);
      end
      for (int wd = 0; wd < 4; wd++) begin
        for (int l = 0; l < 2; l++) w[l*32 +: 32] = 32'(BI[go*8 + wd*2 + l]);
        in_q.push_back(w);
      end
    end
    // tiles
    for (int gi = 0; gi < jb.ci_groups; gi++)
      for (int r = 0; r < jb.in_h; r++)
        for (int x = 0; x < jb.in_w; x++) begin
          for (int l = 0; l < 8; l++) w[l*8 +: 8] = 8'(F[gi*8 + l][r][x]);
          in_q.push_back(w);
        end
    // padded tile
    for (int c = 0; c < ci; c++)
      for (int r = 0; r < hp; r++)
        for (int x = 0; x < wp; x++) begin
          int rr, xx;
          rr = r - jb.pad.top;  xx = x - jb.pad.left;
          P[c][r][x] = (rr >= 0 && rr < jb.in_h && xx >= 0 && xx < jb.in_w) ? F[c][rr][xx] : 0;
        end
    // reference convolution / deconvolution
    if (jb.mode == MODE_CONV) begin oh = ho; ow = wo; end
    else begin oh = 2 * ho; ow = 2 * wo; end
    for (int o = 0; o < co; o++)
      for (int y = 0; y < oh; y++)
        for (int x = 0; x < ow; x++) begin
          longint s;
          s = 0;
          for (int i = 0; i < ci; i++)
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                int pv, u, v;
                u = y + ky;  v = x + kx;
                if (jb.mode == MODE_CONV) pv = P[i][u][v];
                else pv = (u % 2 == 0 && v % 2 == 0 && u/2 < hp && v/2 < wp) ? P[i][u/2][v/2] : 0;
                s += longint'(pv) * K[o][i][ky*3 + kx];
              end
          ACC[o][y][x] = int'(s);
          begin
            longint t;
            int a;
            t = (longint'(ACC[o][y][x]) * SC[o] + BI[o]) >>> jb.bn_shift;
            a = sat8(t);
            if (a != t) n_sat_ref++;
            if (a < 0 && jb.act == ACT_RELU) a = 0;
            else if (a < 0 && jb.act == ACT_LEAKY) a = a >>> 3;
            Y[o][y][x] = a;
          end
        end
    // expected output words
    for (int go = 0; go < jb.co_groups; go++) begin
      if (jb.mode == MODE_CONV && jb.pool != POOL_NONE) begin
        for (int y = 0; y < oh/2; y++)
          for (int x = 0; x < ow/2; x++) begin
            for (int l = 0; l < 8; l++) begin
              int o, m, s4;
              o = go*8 + l;
              m = Y[o][2*y][2*x];
              s4 = 0;
              for (int dy = 0; dy < 2; dy++)
                for (int dx = 0; dx < 2; dx++) begin
                  if (Y[o][2*y+dy][2*x+dx] > m) m = Y[o][2*y+dy][2*x+dx];
                  s4 += Y[o][2*y+dy][2*x+dx];
                end
              w[l*8 +: 8] = 8'((jb.pool == POOL_MAX) ? m : (s4 >>> 2));
            end
            exp_q.push_back(w);
            exp_last.push_back(0);
          end
      end else begin
        for (int y = 0; y < oh; y++)
          for (int x = 0; x < ow; x++) begin
            for (int l = 0; l < 8; l++) w[l*8 +: 8] = 8'(Y[go*8 + l][y][x]);
            exp_q.push_back(w);
            exp_last.push_back(0);
          end
      end
    end
    exp_last[exp_last.size() - 1] = 1;
    n = ho * wp;
    exp_run[j] = jb.ci_groups * jb.co_groups * ((jb.mode == MODE_CONV) ? n : 4 * (n - 1) + 1);
  endtask

  // ---------------------------------------------------------- stream drivers
  int in_idx = 0;
  always_ff @(posedge clk) begin
    if (s_tvalid && s_tready) in_idx <= in_idx + 1;
  end
  logic gap;
  always_ff @(posedge clk) gap <= ($urandom % 5) == 0;
  assign s_tvalid = rst_n && (in_idx < in_q.size()) && !gap;
  assign s_tdata  = (in_idx < in_q.size()) ? in_q[in_idx] : '0;

  always_ff @(posedge clk) m_tready <= ($urandom % 4) != 0;

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

  // ---------------------------------------------------------- mechanism counters
  int c_pad = 0, c_in_stall = 0, c_out_stall = 0, c_overlap = 0, c_accum = 0;
  int c_conv = 0, c_deconv = 0, c_relu = 0, c_leaky = 0, c_noact = 0;
  int c_pmax = 0, c_pavg = 0, c_pnone = 0, c_sat = 0, c_bank1 = 0;
  int run_cyc [NJ];
  int cur_job = 0;

  always_ff @(posedge clk) if (rst_n) begin
    if (dut.u_lbuf.step_out && dut.u_lbuf.tap_zero != 3'b000) c_pad++;
    if (s_tvalid && !s_tready) c_in_stall++;
    if (m_tvalid && !m_tready) c_out_stall++;
    if (dut.ifb_wr_en && dut.u_ctrl.m_st == dut.u_ctrl.M_RUN) c_overlap++;
    if (dut.ifb_wr_commit && dut.u_ifbuf.wsel) c_bank1++;
    if (dut.ser_valid && !dut.ser_first) c_accum++;
    if (dut.pe_valid && dut.mode == MODE_CONV) c_conv++;
    if (dut.pe_valid && dut.mode == MODE_DECONV) c_deconv++;
    if (dut.act_valid && dut.act == ACT_RELU) c_relu++;
    if (dut.act_valid && dut.act == ACT_LEAKY) c_leaky++;
    if (dut.act_valid && dut.act == ACT_NONE) c_noact++;
    if (dut.pool_valid && dut.pool == POOL_MAX) c_pmax++;
    if (dut.pool_valid && dut.pool == POOL_AVG) c_pavg++;
    if (dut.pool_valid && dut.pool == POOL_NONE) c_pnone++;
    if (dut.u_ctrl.m_st == dut.u_ctrl.M_RUN) run_cyc[dut.u_ctrl.jidx]++;
  end
  always_ff @(posedge clk) if (rst_n && dut.bn_valid)
    for (int o = 0; o < 8; o++)
      if (dut.bn_pix[o] == 127 || dut.bn_pix[o] == -128) c_sat++;

  task automatic need(input string what, input int cnt);
    checks++;
    if (cnt == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end else $display("  %-28s %0d", what, cnt);
  endtask

  // ---------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < NJ; j++) begin
      jobs[j] = '0;
      jobs[j].bn_shift = 5'd12;
    end
    // conv, full padding, 2 in / 2 out groups, ReLU, max pooling
    jobs[0].mode = MODE_CONV;   jobs[0].pad = '{1,1,1,1}; jobs[0].in_h = 6; jobs[0].in_w = 6;
    jobs[0].ci_groups = 2; jobs[0].co_groups = 2; jobs[0].act = ACT_RELU; jobs[0].pool = POOL_MAX;
    // deconv, full padding, LeakyReLU
    jobs[1].mode = MODE_DECONV; jobs[1].pad = '{1,1,1,1}; jobs[1].in_h = 3; jobs[1].in_w = 4;
    jobs[1].ci_groups = 2; jobs[1].co_groups = 1; jobs[1].act = ACT_LEAKY; jobs[1].pool = POOL_NONE;
    // middle strip: no padding, average pooling
    jobs[2].mode = MODE_CONV;   jobs[2].pad = '{0,0,0,0}; jobs[2].in_h = 6; jobs[2].in_w = 7;
    jobs[2].ci_groups = 1; jobs[2].co_groups = 1; jobs[2].act = ACT_NONE; jobs[2].pool = POOL_AVG;
    // top strip: top/left/right padding, three input groups
    jobs[3].mode = MODE_CONV;   jobs[3].pad = '{1,0,1,1}; jobs[3].in_h = 4; jobs[3].in_w = 5;
    jobs[3].ci_groups = 3; jobs[3].co_groups = 1; jobs[3].act = ACT_LEAKY; jobs[3].pool = POOL_NONE;
    jobs[3].bn_shift = 5'd10;
    // deconv padded on top and left only: output exactly twice (in - 1)
    jobs[4].mode = MODE_DECONV; jobs[4].pad = '{1,0,1,0}; jobs[4].in_h = 4; jobs[4].in_w = 3;
    jobs[4].ci_groups = 1; jobs[4].co_groups = 2; jobs[4].act = ACT_RELU; jobs[4].pool = POOL_NONE;

    for (int j = 0; j < NJ; j++) begin
      build_job(j);
      run_cyc[j] = 0;
    end

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
    for (int j = 0; j < NJ; j++) begin
      checks++;
      if (run_cyc[j] != exp_run[j]) begin
        failures++;
        $display("FAIL: job %0d PE-array run time %0d cycles, expected %0d", j, run_cyc[j], exp_run[j]);
      end
    end
    $display("mechanisms:");
    need("zero-padding taps", c_pad);
    need("input stream stall", c_in_stall);
    need("output stream stall", c_out_stall);
    need("tile load during compute", c_overlap);
    need("IF bank 1 used", c_bank1);
    need("partial-sum accumulate", c_accum);
    need("PE convolution results", c_conv);
    need("PE deconvolution results", c_deconv);
    need("ReLU pixels", c_relu);
    need("LeakyReLU pixels", c_leaky);
    need("no-activation pixels", c_noact);
    need("max-pooled pixels", c_pmax);
    need("average-pooled pixels", c_pavg);
    need("unpooled pixels", c_pnone);
    need("saturated BN outputs", c_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_segnet_layer: SegNet-Basic sized layers through the accelerator at its
// default sizes, each as one strip that fills the buffers close to their
// limits.
//
// Job 0 is the top strip of a 3x3 convolution layer with 64 input and 64
// output channels on a 360 x 480 map: input rows 0-4, padded on the top,
// left and right, giving output rows 0-3 (4 x 482 = 1928 of the 2048 column
// vectors of an IF bank, 8 x 4 x 480 = 15360 of the 16384 partial sums,
// 4656 of the 8192 parameter words, a full 480-word line-buffer row), with
// ReLU and max pooling.  Job 1 is the first strip of a 64-channel
// deconvolution of a 45 x 60 map: input rows 0-7 padded on all sides,
// output 16 x 120 pixels per channel (15360 partial sums).  Every output
// word is compared with a reference computed here from the textbook
// definitions (direct correlation for convolution; correlation over the
// zero-inserted map for deconvolution; then batch norm, ReLU and pooling),
// and the PE-array run time of each job is checked: 64 passes of one column
// per cycle, or one column per four cycles for the deconvolution.  The
// input stream has random gaps and the output stream random back-pressure.
module tb_segnet_layer;
  import cnn_pkg::*;

  localparam int NJ = 2;
  localparam int MAXC = 64, MAXR = 10, MAXW = 482;

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

  int F  [MAXC][MAXR][MAXW];     // input tile per input channel
  int P  [MAXC][MAXR][MAXW];     // padded tile
  int K  [MAXC][MAXC][9];        // [o][i][k]
  int SC [MAXC];
  int BI [MAXC];
  int ACC[MAXC][2*MAXR][MAXW];
  int Y  [MAXC][2*MAXR][MAXW];

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

  // ---------------------------------------------------------- run-time counters
  int run_cyc [NJ];
  int total_cyc = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.m_st == dut.u_ctrl.M_RUN) run_cyc[dut.u_ctrl.jidx]++;
    if (busy) total_cyc++;
  end

  // ---------------------------------------------------------- watchdog
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // top strip of a 64-channel 360 x 480 encoder layer: output rows 0-3,
    // input rows 0-4, padded top, left and right; ReLU and max pooling
    jobs[0] = '0;
    jobs[0].mode = MODE_CONV;   jobs[0].pad = '{1,0,1,1}; jobs[0].in_h = 5; jobs[0].in_w = 480;
    jobs[0].ci_groups = 8; jobs[0].co_groups = 8; jobs[0].act = ACT_RELU; jobs[0].pool = POOL_MAX;
    jobs[0].bn_shift = 5'd14;
    // first strip of a 64-channel deconvolution of a 45 x 60 map: input
    // rows 0-7 padded on all sides, output 16 x 120 per channel
    jobs[1] = '0;
    jobs[1].mode = MODE_DECONV; jobs[1].pad = '{1,1,1,1}; jobs[1].in_h = 8; jobs[1].in_w = 60;
    jobs[1].ci_groups = 8; jobs[1].co_groups = 8; jobs[1].act = ACT_RELU; jobs[1].pool = POOL_NONE;
    jobs[1].bn_shift = 5'd13;

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
    $display("encoder strip: %0d PE-array cycles", run_cyc[0]);
    $display("decoder strip: %0d PE-array cycles", run_cyc[1]);
    $display("total busy cycles: %0d", total_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// system_controller: the accelerator's control FSMs.
//
// The host pre-loads job descriptors (cnn_pkg::job_t) into the register
// file and pulses start with the number of jobs; the controller reads the
// descriptors in order and executes each one.  A job is one tile of one
// layer: in_h x in_w input pixels of ci_groups x 8 channels, producing
// co_groups x 8 channels.  Two FSMs share the job:
//  - The loader takes the input stream.  It first stores the job's
//    parameters in the weight buffer (ci*co weight sets of 72 words, input
//    group major, then co batch-norm sets of 6 words), then streams each
//    input channel group's tile through the line buffer into a free IF bank
//    and commits the bank.  Because there are two banks, tile g+1 loads while
//    tile g is computed.
//  - The compute FSM, for every input group gi and output group go, loads the
//    weight set (gi, go), reads the IF bank column by column (one column per
//    cycle for convolution, one per four cycles for deconvolution, whose four
//    output pixels leave serially), waits for the pipeline to empty, and
//    moves on.  The first input group starts each partial sum, the last one
//    sends the sums on through batch norm, activation and pooling into the
//    OF buffer.  After the last group it releases the bank; after the job it
//    drains the OF buffer to the output stream.
// With every IF read the controller issues a tag (start of row, window
// complete, output address of the window, first/last input group) that the
// top level delays to meet the data at the process element array.
// Output map addressing: convolution gives (Hp-2) x (Wp-2) pixels, address
// row*(Wp-2)+col; deconvolution gives 2(Hp-2) x 2(Wp-2), block (i, j) at
// 2i*2(Wp-2) + 2j.  Output group go is stored at go * (pixels per group).
// Pooling is applied to convolution jobs only.
// A controller FSM that reads pre-loaded settings in order, triggers the PE
// array, fills the buffers, starts the output transfer and configures
// padding, PE mode, activation and pooling follows the published design;
// the job format, the two-FSM split and all orderings are this design's.
module system_controller
  import cnn_pkg::*;
#(
  parameter int unsigned NJOBS      = 64,
  parameter int unsigned IF_DEPTH   = 2048,
  parameter int unsigned WB_DEPTH   = 8192,
  parameter int unsigned PSUM_DEPTH = 16384,
  parameter int unsigned OF_DEPTH   = 16384,
  parameter int unsigned ADDR_W     = 22,
  parameter int unsigned FLUSH_CYC  = 24
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
  input  logic                          start,
  input  logic [$clog2(NJOBS):0]        n_jobs,
  output logic                          busy,
  output logic                          done,
  output logic [$clog2(NJOBS)-1:0]      job_raddr,
  input  job_t                          job,
  // input stream
  input  logic                          s_valid,
  output logic                          s_ready,
  // weight buffer
  output logic                          wb_wr_en,
  output logic [$clog2(WB_DEPTH)-1:0]   wb_wr_addr,
  output logic                          wb_load,
  output logic [$clog2(WB_DEPTH)-1:0]   wb_w_base,
  output logic [$clog2(WB_DEPTH)-1:0]   wb_bn_base,
  input  logic                          wb_done,
  // line buffer
  output logic                          lb_start,
  output logic [DIM_W-1:0]              lb_w,
  output logic [DIM_W-1:0]              lb_h,
  output pad_mode_t                     lb_pad,
  output logic                          lb_s_valid,
  input  logic                          lb_s_ready,
  input  logic                          lb_out_valid,
  input  logic                          lb_done,
  // IF buffer
  output logic                          ifb_wr_en,
  output logic [$clog2(IF_DEPTH)-1:0]   ifb_wr_addr,
  output logic                          ifb_wr_commit,
  input  logic                          ifb_wr_ready,
  output logic                          ifb_rd_en,
  output logic [$clog2(IF_DEPTH)-1:0]   ifb_rd_addr,
  output logic                          ifb_rd_release,
  input  logic                          ifb_rd_ready,
  // read tag
  output logic                          tag_sol,
  output logic                          tag_win,
  output logic [ADDR_W-1:0]             tag_addr,
  output logic                          tag_first,
  output logic                          tag_last,
  // datapath settings
  output op_mode_e                      mode,
  output act_mode_e                     act,
  output pool_mode_e                    pool,
  output logic [4:0]                    bn_shift,
  output logic                          pool_start,
  output logic [DIM_W:0]                pool_w,
  output logic [ADDR_W-1:0]             out_row_w,
  output logic [$clog2(PSUM_DEPTH)-1:0] psum_base,
  output logic [$clog2(OF_DEPTH)-1:0]   of_base,
  // OF buffer drain
  output logic                          of_start,
  output logic [$clog2(OF_DEPTH):0]     of_count,
  input  logic                          of_done
);
  localparam int unsigned WBA = $clog2(WB_DEPTH);
  localparam int unsigned IFA = $clog2(IF_DEPTH);
  localparam int unsigned PSA = $clog2(PSUM_DEPTH);
  localparam int unsigned OFA = $clog2(OF_DEPTH);

  typedef enum logic [3:0] {
    M_IDLE, M_FETCH, M_WAIT_W, M_WAIT_TILE, M_LOADW, M_RUN, M_FLUSH, M_NEXT, M_DRAIN
  } mstate_e;
  typedef enum logic [2:0] {L_IDLE, L_WEIGHTS, L_TILE_WAIT, L_TILE, L_DONE} lstate_e;

  mstate_e m_st;
  lstate_e l_st;
  job_t    jq;
  logic [$clog2(NJOBS):0] jidx, njobs_q;

  // per-job sizes
  logic [DIM_W+1:0] hp, wp, ho, wo;
  logic [ADDR_W-1:0] npix, npix_out, nwords, ncols, wsets;
  logic             deconv;

  assign deconv = (jq.mode == MODE_DECONV);
  assign hp     = (DIM_W+2)'(jq.in_h) + jq.pad.top + jq.pad.bottom;
  assign wp     = (DIM_W+2)'(jq.in_w) + jq.pad.left + jq.pad.right;
  assign ho     = hp - (DIM_W+2)'(2);
  assign wo     = wp - (DIM_W+2)'(2);
  assign ncols  = ADDR_W'(ho) * ADDR_W'(wp);
  assign npix   = deconv ? ADDR_W'(4) * ADDR_W'(ho) * ADDR_W'(wo) : ADDR_W'(ho) * ADDR_W'(wo);
  assign npix_out = (!deconv && jq.pool != POOL_NONE) ? ADDR_W'(ho >> 1) * ADDR_W'(wo >> 1) : npix;
  assign wsets  = ADDR_W'(jq.ci_groups) * ADDR_W'(jq.co_groups);
  assign nwords = wsets * ADDR_W'(WSET_WORDS) + ADDR_W'(jq.co_groups) * ADDR_W'(BN_WORDS);

  assign job_raddr = jidx[$clog2(NJOBS)-1:0];
  assign mode      = jq.mode;
  assign act       = jq.act;
  assign pool      = deconv ? POOL_NONE : jq.pool;
  assign bn_shift  = jq.bn_shift;
  assign pool_w    = (DIM_W+1)'(wo);
  assign out_row_w = deconv ? ADDR_W'(wo) << 1 : ADDR_W'(wo);
  assign lb_w      = jq.in_w;
  assign lb_h      = jq.in_h;
  assign lb_pad    = jq.pad;

  // ---------------------------------------------------------------- loader
  logic             weights_ready, l_go;
  logic [WBA-1:0]   l_waddr;
  logic [GRP_W-1:0] l_gi;

  always_comb begin
    s_ready    = 1'b0;
    lb_s_valid = 1'b0;
    wb_wr_en   = 1'b0;
    lb_start   = 1'b0;
    ifb_wr_commit = 1'b0;
    case (l_st)
      L_WEIGHTS: begin
        s_ready  = 1'b1;
        wb_wr_en = s_valid;
      end
      L_TILE_WAIT: lb_start = ifb_wr_ready;
      L_TILE: begin
        s_ready       = lb_s_ready;
        lb_s_valid    = s_valid;
        ifb_wr_commit = lb_done;
      end
      default: ;
    endcase
  end
  assign wb_wr_addr = l_waddr;
  assign ifb_wr_en  = lb_out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l_st          <= L_IDLE;
      l_waddr       <= '0;
      l_gi          <= '0;
      weights_ready <= 1'b0;
      ifb_wr_addr   <= '0;
    end else begin
      if (lb_out_valid) ifb_wr_addr <= ifb_wr_addr + 1'b1;
      case (l_st)
        L_IDLE: if (l_go) begin
          l_st          <= L_WEIGHTS;
          l_waddr       <= '0;
          l_gi          <= '0;
          weights_ready <= 1'b0;
        end
        L_WEIGHTS: if (s_valid) begin
          l_waddr <= l_waddr + 1'b1;
          if (ADDR_W'(l_waddr) == nwords - 1'b1) begin
            weights_ready <= 1'b1;
            l_st          <= L_TILE_WAIT;
          end
        end
        L_TILE_WAIT: if (ifb_wr_ready) begin
          l_st        <= L_TILE;
          ifb_wr_addr <= '0;
        end
        L_TILE: if (lb_done) begin
          l_gi <= l_gi + 1'b1;
          l_st <= (l_gi == jq.ci_groups - 1'b1) ? L_DONE : L_TILE_WAIT;
        end
        L_DONE: if (l_go) begin
          l_st          <= L_WEIGHTS;
          l_waddr       <= '0;
          l_gi          <= '0;
          weights_ready <= 1'b0;
        end
        default: l_st <= L_IDLE;
      endcase
    end
  end

  // --------------------------------------------------------------- compute
  logic [GRP_W-1:0]  gi, go;
  logic [DIM_W+1:0]  r_row, r_col;
  logic [1:0]        phase;
  logic [IFA-1:0]    raddr;
  logic [ADDR_W-1:0] row_base;
  logic [7:0]        flush_cnt;
  logic              load_issued, issue, last_issue;

  assign issue      = (m_st == M_RUN) && (!deconv || phase == 2'd0);
  assign last_issue = issue && (r_row == ho - 1'b1) && (r_col == wp - 1'b1);
  assign ifb_rd_en   = issue;
  assign ifb_rd_addr = raddr;
  assign tag_sol     = (r_col == 0);
  assign tag_win     = (r_col >= 2);
  assign tag_addr    = row_base + (deconv ? ADDR_W'(r_col - 2'd2) << 1 : ADDR_W'(r_col - 2'd2));
  assign tag_first   = (gi == 0);
  assign tag_last    = (gi == jq.ci_groups - 1'b1);
  assign wb_load     = (m_st == M_LOADW) && !load_issued;
  assign wb_w_base   = WBA'((ADDR_W'(gi) * ADDR_W'(jq.co_groups) + ADDR_W'(go)) * ADDR_W'(WSET_WORDS));
  assign wb_bn_base  = WBA'(wsets * ADDR_W'(WSET_WORDS) + ADDR_W'(go) * ADDR_W'(BN_WORDS));
  assign ifb_rd_release = (m_st == M_NEXT) && (go == jq.co_groups - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_st        <= M_IDLE;
      jq          <= '0;
      jidx        <= '0;
      njobs_q     <= '0;
      busy        <= 1'b0;
      done        <= 1'b0;
      l_go        <= 1'b0;
      gi          <= '0;
      go          <= '0;
      r_row       <= '0;
      r_col       <= '0;
      phase       <= '0;
      raddr       <= '0;
      row_base    <= '0;
      flush_cnt   <= '0;
      load_issued <= 1'b0;
      pool_start  <= 1'b0;
      psum_base   <= '0;
      of_base     <= '0;
      of_start    <= 1'b0;
      of_count    <= '0;
    end else begin
      done       <= 1'b0;
      l_go       <= 1'b0;
      pool_start <= 1'b0;
      of_start   <= 1'b0;
      case (m_st)
        M_IDLE: if (start && n_jobs != 0) begin
          busy    <= 1'b1;
          jidx    <= '0;
          njobs_q <= n_jobs;
          m_st    <= M_FETCH;
        end
        M_FETCH: begin
          jq   <= job;
          l_go <= 1'b1;
          gi   <= '0;
          go   <= '0;
          m_st <= M_WAIT_W;
        end
        M_WAIT_W: if (weights_ready && !l_go) m_st <= M_WAIT_TILE;
        M_WAIT_TILE: if (ifb_rd_ready) begin
          m_st        <= M_LOADW;
          load_issued <= 1'b0;
        end
        M_LOADW: begin
          load_issued <= 1'b1;
          if (wb_done) begin
            m_st       <= M_RUN;
            r_row      <= '0;
            r_col      <= '0;
            phase      <= '0;
            raddr      <= '0;
            row_base   <= '0;
            pool_start <= 1'b1;
            psum_base  <= PSA'(ADDR_W'(go) * npix);
            of_base    <= OFA'(ADDR_W'(go) * npix_out);
          end
        end
        M_RUN: begin
          if (deconv) phase <= phase + 1'b1;
          if (issue) begin
            raddr <= raddr + 1'b1;
            if (r_col == wp - 1'b1) begin
              r_col    <= '0;
              r_row    <= r_row + 1'b1;
              row_base <= row_base + (deconv ? ADDR_W'(wo) << 2 : ADDR_W'(wo));
            end else begin
              r_col <= r_col + 1'b1;
            end
            if (last_issue) begin
              m_st      <= M_FLUSH;
              flush_cnt <= '0;
            end
          end
        end
        M_FLUSH: begin
          flush_cnt <= flush_cnt + 1'b1;
          if (flush_cnt == 8'(FLUSH_CYC - 1)) m_st <= M_NEXT;
        end
        M_NEXT: begin
          if (go != jq.co_groups - 1'b1) begin
            go   <= go + 1'b1;
            m_st <= M_LOADW;
            load_issued <= 1'b0;
          end else if (gi != jq.ci_groups - 1'b1) begin
            go   <= '0;
            gi   <= gi + 1'b1;
            m_st <= M_WAIT_TILE;
          end else begin
            of_start <= 1'b1;
            of_count <= (OFA+1)'(ADDR_W'(jq.co_groups) * npix_out);
            m_st     <= M_DRAIN;
          end
        end
        M_DRAIN: if (of_done) begin
          if (jidx + 1'b1 == njobs_q) begin
            busy <= 1'b0;
            done <= 1'b1;
            m_st <= M_IDLE;
          end else begin
            jidx <= jidx + 1'b1;
            m_st <= M_FETCH;
          end
        end
        default: m_st <= M_IDLE;
      endcase
    end
  end

  // sizes of a job must fit the buffers
  a_if_fit:   assert property (@(posedge clk) disable iff (!rst_n) (m_st == M_RUN) |-> (ncols <= ADDR_W'(IF_DEPTH)));
  a_wb_fit:   assert property (@(posedge clk) disable iff (!rst_n) (m_st == M_RUN) |-> (nwords <= ADDR_W'(WB_DEPTH)));
  a_psum_fit: assert property (@(posedge clk) disable iff (!rst_n) (m_st == M_RUN) |-> (ADDR_W'(jq.co_groups) * npix <= ADDR_W'(PSUM_DEPTH)));
  a_of_fit:   assert property (@(posedge clk) disable iff (!rst_n) (m_st == M_RUN) |-> (ADDR_W'(jq.co_groups) * npix_out <= ADDR_W'(OF_DEPTH)));
endmodule

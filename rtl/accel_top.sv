// accel_top: unified convolution / deconvolution CNN accelerator.
//
// One process element array computes both 3x3 convolution and 3x3,
// stride-2 transposed convolution (deconvolution).  Data path:
//   input stream -> line buffer (zero padding, 3x1 columns) -> IF buffer
//   (two banks) -> shift register (3x3 window) -> PE array (8 x 8 elements
//   of 9 multipliers) -> output serializer -> partial-sum buffer ->
//   batch norm -> activation -> pooling -> OF buffer -> output stream,
// with the weight buffer feeding the PE array from the same input stream,
// and the system controller, driven by a register file of pre-loaded jobs,
// sequencing it all.
// Host interface: cfg_we/cfg_waddr/cfg_wdata write 64-bit job descriptors
// (cnn_pkg::job_t); start with n_jobs runs jobs 0 .. n_jobs-1; busy is high
// meanwhile and done pulses at the end.  For each job the input stream
// (s_axis_*, 64 bits = 8 channels of one pixel) must carry, in order, the
// job's parameter words (see weight_buffer and system_controller) and then
// one in_h x in_w raster tile per input channel group.  The output stream
// (m_axis_*) returns co_groups planes of the output map, each in raster
// order, m_axis_tlast on the job's last word.  Both streams transfer a word
// when valid and ready are high together.
// The block structure follows the published design; buffer depths, the job
// format, the stream ordering and the interfaces are this design's choices.
module accel_top
  import cnn_pkg::*;
#(
  parameter int unsigned MAX_W      = 480,
  parameter int unsigned IF_DEPTH   = 2048,
  parameter int unsigned WB_DEPTH   = 8192,
  parameter int unsigned PSUM_DEPTH = 16384,
  parameter int unsigned OF_DEPTH   = 16384,
  parameter int unsigned NJOBS      = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host configuration
  input  logic                     cfg_we,
  input  logic [$clog2(NJOBS)-1:0] cfg_waddr,
  input  logic [63:0]              cfg_wdata,
  input  logic                     start,
  input  logic [$clog2(NJOBS):0]   n_jobs,
  output logic                     busy,
  output logic                     done,
  // input DMA stream
  input  word_t                    s_axis_tdata,
  input  logic                     s_axis_tvalid,
  output logic                     s_axis_tready,
  // output DMA stream
  output word_t                    m_axis_tdata,
  output logic                     m_axis_tvalid,
  output logic                     m_axis_tlast,
  input  logic                     m_axis_tready
);
  localparam int unsigned ADDR_W = 22;
  localparam int unsigned WBA = $clog2(WB_DEPTH);
  localparam int unsigned IFA = $clog2(IF_DEPTH);
  localparam int unsigned PSA = $clog2(PSUM_DEPTH);
  localparam int unsigned OFA = $clog2(OF_DEPTH);
  localparam int unsigned PE_LAT = 3;  // pe_array latency

  // controller <-> units
  job_t              job;
  logic [$clog2(NJOBS)-1:0] job_raddr;
  logic              wb_wr_en, wb_load, wb_busy, wb_done;
  logic [WBA-1:0]    wb_wr_addr, wb_w_base, wb_bn_base;
  logic              lb_start, lb_s_valid, lb_s_ready, lb_out_valid, lb_out_sol, lb_busy, lb_done;
  logic [DIM_W-1:0]  lb_w, lb_h;
  pad_mode_t         lb_pad;
  word_t             lb_col [3];
  logic              ifb_wr_en, ifb_wr_commit, ifb_wr_ready, ifb_rd_en, ifb_rd_release, ifb_rd_ready;
  logic [IFA-1:0]    ifb_wr_addr, ifb_rd_addr;
  word_t             ifb_rd_data [3];
  logic              tag_sol, tag_win, tag_first, tag_last;
  logic [ADDR_W-1:0] tag_addr;
  op_mode_e          mode;
  act_mode_e         act;
  pool_mode_e        pool;
  logic [4:0]        bn_shift;
  logic              pool_start;
  logic [DIM_W:0]    pool_w;
  logic [ADDR_W-1:0] out_row_w;
  logic [PSA-1:0]    psum_base;
  logic [OFA-1:0]    of_base;
  logic              of_start, of_busy, of_done;
  logic [OFA:0]      of_count;

  config_regfile #(.NJOBS(NJOBS)) u_regs (
    .clk, .rst_n, .we (cfg_we), .waddr (cfg_waddr), .wdata (cfg_wdata),
    .raddr (job_raddr), .rdata (job)
  );

  system_controller #(
    .NJOBS (NJOBS), .IF_DEPTH (IF_DEPTH), .WB_DEPTH (WB_DEPTH),
    .PSUM_DEPTH (PSUM_DEPTH), .OF_DEPTH (OF_DEPTH), .ADDR_W (ADDR_W)
  ) u_ctrl (
    .clk, .rst_n, .start, .n_jobs, .busy, .done, .job_raddr, .job,
    .s_valid (s_axis_tvalid), .s_ready (s_axis_tready),
    .wb_wr_en, .wb_wr_addr, .wb_load, .wb_w_base, .wb_bn_base, .wb_done,
    .lb_start, .lb_w, .lb_h, .lb_pad, .lb_s_valid, .lb_s_ready, .lb_out_valid, .lb_done,
    .ifb_wr_en, .ifb_wr_addr, .ifb_wr_commit, .ifb_wr_ready,
    .ifb_rd_en, .ifb_rd_addr, .ifb_rd_release, .ifb_rd_ready,
    .tag_sol, .tag_win, .tag_addr, .tag_first, .tag_last,
    .mode, .act, .pool, .bn_shift, .pool_start, .pool_w, .out_row_w,
    .psum_base, .of_base, .of_start, .of_count, .of_done
  );

  // ------------------------------------------------------------ input side
  pix_t                   weight   [NCH][NCH][KTAPS];
  logic signed [BNS_W-1:0] bn_scale [NCH];
  logic signed [BNB_W-1:0] bn_bias  [NCH];

  weight_buffer #(.DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .rst_n, .wr_en (wb_wr_en), .wr_addr (wb_wr_addr), .wr_data (s_axis_tdata),
    .load (wb_load), .w_base (wb_w_base), .bn_base (wb_bn_base),
    .busy (wb_busy), .done (wb_done), .weight, .bn_scale, .bn_bias
  );

  line_buffer #(.MAX_W(MAX_W)) u_lbuf (
    .clk, .rst_n, .start (lb_start), .cfg_w (lb_w), .cfg_h (lb_h), .cfg_pad (lb_pad),
    .s_data (s_axis_tdata), .s_valid (lb_s_valid), .s_ready (lb_s_ready),
    .out_valid (lb_out_valid), .out_sol (lb_out_sol), .out_col (lb_col),
    .busy (lb_busy), .done (lb_done)
  );

  if_buffer #(.DEPTH(IF_DEPTH)) u_ifbuf (
    .clk, .rst_n,
    .wr_en (ifb_wr_en), .wr_addr (ifb_wr_addr), .wr_data (lb_col),
    .wr_commit (ifb_wr_commit), .wr_ready (ifb_wr_ready),
    .rd_en (ifb_rd_en), .rd_addr (ifb_rd_addr), .rd_data (ifb_rd_data),
    .rd_release (ifb_rd_release), .rd_ready (ifb_rd_ready)
  );

  // ------------------------------------------------------------ compute
  logic  rd_v1, rd_sol1;
  logic  win_valid;
  word_t win [3][3];

  pipe_delay #(.WIDTH(2), .DEPTH(1)) u_rd_dly (
    .clk, .rst_n, .d ({ifb_rd_en, tag_sol}), .q ({rd_v1, rd_sol1})
  );

  window_shift_reg u_shift (
    .clk, .rst_n, .in_valid (rd_v1), .in_sol (rd_sol1), .in_col (ifb_rd_data),
    .out_valid (win_valid), .win
  );

  logic                    pe_valid;
  logic signed [ACC_W-1:0] pe_sum [NCH][4];

  pe_array u_pe (
    .clk, .rst_n, .mode, .in_valid (win_valid), .win, .weight,
    .out_valid (pe_valid), .sum (pe_sum)
  );

  // tag of a window: issued with the read, meets the PE result 2 + PE_LAT cycles later
  logic              t_win;
  logic [ADDR_W-1:0] t_addr;
  logic              t_first, t_last;

  pipe_delay #(.WIDTH(ADDR_W + 3), .DEPTH(2 + PE_LAT)) u_tag_dly (
    .clk, .rst_n,
    .d ({ifb_rd_en && tag_win, tag_addr, tag_first, tag_last}),
    .q ({t_win, t_addr, t_first, t_last})
  );

  logic                    ser_valid;
  logic signed [ACC_W-1:0] ser_data [NCH];
  logic [ADDR_W-1:0]       ser_addr;
  logic                    ser_first, ser_last;

  out_serializer #(.ADDR_W(ADDR_W), .TAG_W(2)) u_ser (
    .clk, .rst_n, .mode, .row_w (out_row_w),
    .in_valid (pe_valid), .in_data (pe_sum), .in_addr (t_addr), .in_tag ({t_first, t_last}),
    .out_valid (ser_valid), .out_data (ser_data), .out_addr (ser_addr),
    .out_tag ({ser_first, ser_last})
  );

  // ------------------------------------------------------------ output side
  logic                    ps_valid, ps_last;
  logic signed [ACC_W-1:0] ps_data [NCH];
  logic [ADDR_W-1:0]       ps_addr;

  psum_buffer #(.DEPTH(PSUM_DEPTH), .TAG_W(ADDR_W + 1)) u_psum (
    .clk, .rst_n, .in_valid (ser_valid), .in_first (ser_first),
    .in_addr (psum_base + PSA'(ser_addr)), .in_data (ser_data), .in_tag ({ser_last, ser_addr}),
    .out_valid (ps_valid), .out_data (ps_data), .out_tag ({ps_last, ps_addr})
  );

  logic              bn_valid, act_valid, pool_valid;
  pix_t              bn_pix [NCH];
  pix_t              act_pix [NCH];
  pix_t              pool_pix [NCH];
  logic [ADDR_W-1:0] bn_addr, act_addr, pool_addr;

  batch_norm #(.TAG_W(ADDR_W)) u_bn (
    .clk, .rst_n, .in_valid (ps_valid && ps_last), .in_data (ps_data), .in_tag (ps_addr),
    .scale (bn_scale), .bias (bn_bias), .shift (bn_shift),
    .out_valid (bn_valid), .out_pix (bn_pix), .out_tag (bn_addr)
  );

  activation #(.TAG_W(ADDR_W)) u_act (
    .clk, .rst_n, .mode (act), .in_valid (bn_valid), .in_pix (bn_pix), .in_tag (bn_addr),
    .out_valid (act_valid), .out_pix (act_pix), .out_tag (act_addr)
  );

  pooling #(.MAX_W(MAX_W), .ADDR_W(ADDR_W)) u_pool (
    .clk, .rst_n, .mode (pool), .start (pool_start), .cfg_w (pool_w),
    .in_valid (act_valid), .in_pix (act_pix), .in_addr (act_addr),
    .out_valid (pool_valid), .out_pix (pool_pix), .out_addr (pool_addr)
  );

  of_buffer #(.DEPTH(OF_DEPTH)) u_ofbuf (
    .clk, .rst_n, .wr_en (pool_valid), .wr_addr (of_base + OFA'(pool_addr)), .wr_pix (pool_pix),
    .start (of_start), .count (of_count),
    .m_data (m_axis_tdata), .m_valid (m_axis_tvalid), .m_last (m_axis_tlast), .m_ready (m_axis_tready),
    .busy (of_busy), .done (of_done)
  );

  // the window tag and the PE result must arrive together
  a_tag_align: assert property (@(posedge clk) disable iff (!rst_n) pe_valid == t_win);
endmodule

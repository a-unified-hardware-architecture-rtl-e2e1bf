// line_buffer: converts the input pixel stream into zero-padded 3x1 column
// vectors for the IF buffer.
//
// Three cascaded FIFOs each hold one image row (up to MAX_W pixels of one
// 64-bit channel group).  The stream enters FIFO 0; a pixel popped from
// FIFO 0 moves to FIFO 1 and one popped from FIFO 1 moves to FIFO 2.  Each
// FIFO head feeds a two-input mux whose other input is zero; the padding
// controller (padding_ctrl) drives the pushes, pops and mux selects
// according to the pre-loaded padding mode.  The output column is
// col[0] = top row (FIFO 2), col[1] = middle (FIFO 1), col[2] = bottom
// (FIFO 0) of the 3x3 window.
// Interface: s_data/s_valid/s_ready is an AXI-Stream style input (a beat
// transfers when both valid and ready are high).  start loads the tile size
// and padding mode; for a padded tile of Hp x Wp the block emits
// (Hp-2) x Wp columns in raster order, registered (one cycle after the
// step that produced them), then pulses done.
// Each FIFO reports empty, full, fill level and "one row stored"; they are
// brought out on internal signals for observation only, because the padding
// controller schedules every push and pop by counting, which makes the
// FIFOs' state known in advance (the FIFOs assert against overflow and
// underflow instead).  Lint therefore reports them as unused.
// FIFO depth (the maximum tile width) is this design's choice.
module line_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned MAX_W = 480
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DIM_W-1:0] cfg_w,
  input  logic [DIM_W-1:0] cfg_h,
  input  pad_mode_t        cfg_pad,
  input  word_t            s_data,
  input  logic             s_valid,
  output logic             s_ready,
  output logic             out_valid,
  output logic             out_sol,
  output word_t            out_col [3],
  output logic             busy,
  output logic             done
);
  localparam int unsigned LW = $clog2(MAX_W + 1);

  logic [2:0] push, pop, tap_zero;
  logic       step_out, step_sol, ctl_done;
  word_t      fifo_in [3];
  word_t      fifo_out [3];
  logic [2:0] f_empty, f_full, f_row_full;
  logic [LW-1:0] f_level [3];

  padding_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg_w, .cfg_h, .cfg_pad,
    .in_valid (s_valid), .in_ready (s_ready),
    .push, .pop, .tap_zero,
    .out_valid (step_out), .out_sol (step_sol),
    .busy (), .done (ctl_done)
  );

  assign fifo_in[0] = s_data;
  assign fifo_in[1] = fifo_out[0];
  assign fifo_in[2] = fifo_out[1];

  for (genvar k = 0; k < 3; k++) begin : g_fifo
    sync_fifo #(.WIDTH(WORD_W), .DEPTH(MAX_W)) u_fifo (
      .clk, .rst_n,
      .clear    (start && !busy),
      .push     (push[k]),
      .wr_data  (fifo_in[k]),
      .pop      (pop[k]),
      .rd_data  (fifo_out[k]),
      .row_len  (LW'(cfg_w)),
      .level    (f_level[k]),
      .empty    (f_empty[k]),
      .full     (f_full[k]),
      .row_full (f_row_full[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sol   <= 1'b0;
      busy      <= 1'b0;
      done      <= 1'b0;
      for (int k = 0; k < 3; k++) out_col[k] <= '0;
    end else begin
      out_valid <= step_out;
      out_sol   <= step_sol;
      done      <= ctl_done;
      if (start && !busy) busy <= 1'b1;
      else if (ctl_done)  busy <= 1'b0;
      // zero-padding muxes; tap k comes from FIFO k, col[0] is the top row
      for (int k = 0; k < 3; k++)
        out_col[2-k] <= tap_zero[k] ? '0 : fifo_out[k];
    end
  end
endmodule

// padding_ctrl: padding controller of the line buffer.
//
// It walks the zero-padded tile in raster order, one padded position per
// step.  The padded tile is pad.top + H + pad.bottom rows by
// pad.left + W + pad.right columns; only the H x W real pixels arrive on the
// input stream, the padding is never stored.  Row slot s (0 .. Hp) is the
// padded row currently written into FIFO 0, so at slot s the heads of FIFO 0,
// 1 and 2 hold padded rows s-1, s-2 and s-3.  At every real column it
//   - pushes the stream pixel into FIFO 0 if row s is a real row,
//   - pops each FIFO whose row is real and moves the popped pixel one FIFO
//     further down the cascade,
//   - forces each output tap to zero whose row or column is padding,
// and from slot 3 on it emits one 3x1 column per step.  A step is taken every
// cycle in which no stream pixel is needed, or the stream pixel is valid, so
// padding positions cost one cycle each and hold the stream (ready low).
// Slot Hp has no input row and flushes the last window rows.
// Timing: start (one cycle, while idle) loads the size and mode; busy stays
// high until the cycle after the last step, in which done pulses.
// The cascaded FIFOs, the zero input of the output muxes and the controller
// driving both follow the published line buffer; the slot schedule is this
// design's own.
module padding_ctrl
  import cnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DIM_W-1:0] cfg_w,      // real tile width
  input  logic [DIM_W-1:0] cfg_h,      // real tile height
  input  pad_mode_t        cfg_pad,
  input  logic             in_valid,   // stream pixel available
  output logic             in_ready,   // stream pixel consumed this cycle
  output logic [2:0]       push,       // FIFO k push
  output logic [2:0]       pop,        // FIFO k pop
  output logic [2:0]       tap_zero,   // output tap k (FIFO k) forced to zero
  output logic             out_valid,  // a column is emitted this cycle
  output logic             out_sol,    // ... and it is the first of a padded row
  output logic             busy,
  output logic             done
);
  logic [DIM_W-1:0] w_q, h_q;
  pad_mode_t        pad_q;
  logic [DIM_W+1:0] s, pc;          // row slot and padded column
  logic [DIM_W+1:0] hp, wp;         // padded sizes
  logic             step, need_in, real_c, last;
  logic [2:0]       real_r;         // rows s-1, s-2, s-3 real

  assign hp = (DIM_W+2)'(h_q) + pad_q.top + pad_q.bottom;
  assign wp = (DIM_W+2)'(w_q) + pad_q.left + pad_q.right;

  function automatic logic row_real(input int r, input logic top, input int h);
    return (r >= int'(top)) && (r < int'(top) + h);
  endfunction

  always_comb begin
    real_c = (pc >= (DIM_W+2)'(pad_q.left)) && (pc < (DIM_W+2)'(pad_q.left) + (DIM_W+2)'(w_q));
    for (int k = 0; k < 3; k++)
      real_r[k] = row_real(int'(s) - 1 - k, pad_q.top, int'(h_q));
    need_in  = real_c && row_real(int'(s), pad_q.top, int'(h_q));
    step     = busy && (!need_in || in_valid);
    in_ready = step && need_in;
    pop      = (step && real_c) ? real_r : 3'b000;
    push     = {pop[1], pop[0], in_ready};
    tap_zero = real_c ? ~real_r : 3'b111;
    out_valid = step && (s >= 3);
    out_sol   = out_valid && (pc == 0);
    last      = (s == hp) && (pc == wp - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      s     <= '0;
      pc    <= '0;
      w_q   <= '0;
      h_q   <= '0;
      pad_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        s     <= '0;
        pc    <= '0;
        w_q   <= cfg_w;
        h_q   <= cfg_h;
        pad_q <= cfg_pad;
      end else if (step) begin
        if (last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else if (pc == wp - 1'b1) begin
          pc <= '0;
          s  <= s + 1'b1;
        end else begin
          pc <= pc + 1'b1;
        end
      end
    end
  end
endmodule

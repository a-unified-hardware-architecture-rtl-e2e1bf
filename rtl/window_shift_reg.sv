// window_shift_reg: rebuilds the sliding window from 3x1 column vectors.
//
// Every valid input column (three 64-bit words, top to bottom) shifts the
// three stored columns one place to the left, two register stages per window
// row plus the incoming column, so after the third column of a padded row
// the registers hold a full 3x3 window of eight channels.  win[r][c] is row r
// (0 = top) and column c (0 = oldest, leftmost).  Convolution uses all nine
// positions; deconvolution uses the 2x2 patch win[0..1][0..1].
// in_sol marks the first column of a padded row; out_valid is high in the
// cycle after a column that completed a window (the third or a later column
// of its row).  Latency: one cycle.
// The structure (shift register between IF buffer and PE array, two register
// stages per row) follows the published figure; the valid/sol handshake is
// this design's own.
module window_shift_reg
  import cnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sol,
  input  word_t in_col [3],
  output logic  out_valid,
  output word_t win [3][3]
);
  logic [1:0] ncol;   // columns of the current row already held, saturating at 2

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ncol      <= '0;
      out_valid <= 1'b0;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) win[r][c] <= '0;
    end else begin
      out_valid <= in_valid && !in_sol && (ncol == 2'd2);
      if (in_valid) begin
        ncol <= in_sol ? 2'd1 : ((ncol == 2'd2) ? 2'd2 : ncol + 1'b1);
        for (int r = 0; r < 3; r++) begin
          win[r][0] <= win[r][1];
          win[r][1] <= win[r][2];
          win[r][2] <= in_col[r];
        end
      end
    end
  end
endmodule

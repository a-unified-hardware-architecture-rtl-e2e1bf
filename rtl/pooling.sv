// pooling: 2x2 max or average pooling with stride 2, or bypass.
//
// The input is the raster-ordered output map of a convolution, one pixel
// position (eight channels) per valid cycle, cfg_w pixels per row; start
// restarts the row/column count for a new map.  A held register pairs each
// even column with the following odd column; on even rows the pair result is
// written into a line buffer of cfg_w/2 entries, on odd rows it is combined
// with the stored value of the row above to give one pooled pixel.  Max mode
// keeps the largest of the four pixels; average mode adds them and shifts
// right by two.  A last odd column or row is dropped.  The pooled pixel
// leaves with its address in the pooled map, (row/2)*(cfg_w/2) + col/2.  In
// bypass mode every pixel leaves with its input address.  Latency: one cycle.
// The 2x2 window built with a line buffer and a register and the choice of
// max or average pooling follow the published design; the addressing, the
// rounding and the treatment of odd sizes are this design's.
module pooling
  import cnn_pkg::*;
#(
  parameter int unsigned NO     = NCH,
  parameter int unsigned MAX_W  = 480,
  parameter int unsigned ADDR_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pool_mode_e        mode,
  input  logic              start,
  input  logic [DIM_W:0]    cfg_w,     // input map width
  input  logic              in_valid,
  input  pix_t              in_pix [NO],
  input  logic [ADDR_W-1:0] in_addr,
  output logic              out_valid,
  output pix_t              out_pix [NO],
  output logic [ADDR_W-1:0] out_addr
);
  localparam int unsigned LW = $clog2(MAX_W/2);
  typedef logic signed [PIX_W+1:0] part_t;      // max, or sum of up to four pixels

  part_t             line [MAX_W/2][NO];
  part_t             held [NO];
  part_t             pair [NO];
  part_t             quad [NO];
  logic [DIM_W:0]    row, col;
  logic [ADDR_W-1:0] prow_base;                  // address of the first pooled pixel of the row
  logic              pool_on, last_col;
  logic [DIM_W:0]    half_w;

  assign pool_on  = (mode != POOL_NONE);
  assign half_w   = cfg_w >> 1;
  assign last_col = (col == cfg_w - 1'b1);

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      part_t cur, up;
      cur = part_t'(in_pix[o]);
      up  = line[LW'(col >> 1)][o];
      if (mode == POOL_MAX) begin
        pair[o] = (held[o] > cur) ? held[o] : cur;
        quad[o] = (up > pair[o]) ? up : pair[o];
      end else begin
        pair[o] = held[o] + cur;
        quad[o] = (up + pair[o]) >>> 2;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && pool_on && col[0] && !row[0] && (col >> 1) < half_w)
      line[LW'(col >> 1)] <= pair;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0;
      col <= '0;
      prow_base <= '0;
      out_valid <= 1'b0;
      out_addr  <= '0;
      for (int o = 0; o < NO; o++) begin
        held[o]    <= '0;
        out_pix[o] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        row <= '0;
        col <= '0;
        prow_base <= '0;
      end else if (in_valid && !pool_on) begin
        out_valid <= 1'b1;
        out_addr  <= in_addr;
        out_pix   <= in_pix;
      end else if (in_valid) begin
        if (!col[0])
          for (int o = 0; o < NO; o++) held[o] <= part_t'(in_pix[o]);
        if (col[0] && row[0]) begin
          out_valid <= 1'b1;
          out_addr  <= prow_base + ADDR_W'(col >> 1);
          for (int o = 0; o < NO; o++) out_pix[o] <= quad[o][PIX_W-1:0];
        end
        if (last_col) begin
          col <= '0;
          row <= row + 1'b1;
          if (row[0]) prow_base <= prow_base + ADDR_W'(half_w);
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end
endmodule

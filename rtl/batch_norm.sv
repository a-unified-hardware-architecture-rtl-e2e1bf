// batch_norm: inference-time batch normalisation and requantisation.
//
// At inference batch normalisation reduces to one multiplication and one
// addition per output channel: y = (x * scale + bias) >>> shift, saturated
// to the signed 8-bit pixel range.  x is the accumulated convolution sum;
// scale, bias and shift are the folded normalisation (and convolution bias)
// parameters.  The shift truncates toward minus infinity.  Latency: two
// cycles (multiply, then add / shift / saturate); the tag follows the data.
// Multiply-and-add follows the published design; the widths, the shift and
// the saturation are this design's choices.
module batch_norm
  import cnn_pkg::*;
#(
  parameter int unsigned NO    = NCH,
  parameter int unsigned TAG_W = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] in_data  [NO],
  input  logic [TAG_W-1:0]        in_tag,
  input  logic signed [BNS_W-1:0] scale    [NO],
  input  logic signed [BNB_W-1:0] bias     [NO],
  input  logic [4:0]              shift,
  output logic                    out_valid,
  output pix_t                    out_pix  [NO],
  output logic [TAG_W-1:0]        out_tag
);
  localparam int unsigned MW = ACC_W + BNS_W;

  logic signed [MW-1:0]   prod [NO];
  logic                   v1;
  logic [TAG_W-1:0]       t1;
  logic signed [MW:0]     y    [NO];
  pix_t                   sat  [NO];

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      y[o] = ((MW+1)'(prod[o]) + (MW+1)'(bias[o])) >>> shift;
      if (y[o] > (MW+1)'(127))       sat[o] = 8'sd127;
      else if (y[o] < -(MW+1)'(128)) sat[o] = -8'sd128;
      else                           sat[o] = y[o][PIX_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      t1 <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int o = 0; o < NO; o++) begin
        prod[o]    <= '0;
        out_pix[o] <= '0;
      end
    end else begin
      v1 <= in_valid;
      t1 <= in_tag;
      for (int o = 0; o < NO; o++) prod[o] <= in_data[o] * scale[o];
      out_valid <= v1;
      out_tag   <= t1;
      out_pix   <= sat;
    end
  end
endmodule

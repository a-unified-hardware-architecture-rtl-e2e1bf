// activation: ReLU, LeakyReLU or bypass on eight 8-bit channels.
//
// ReLU replaces negative pixels with zero.  LeakyReLU multiplies negative
// pixels by 1/8, done as an arithmetic right shift by three (rounding toward
// minus infinity).  ACT_NONE passes the pixels unchanged.  Latency: one
// cycle; the tag follows the data.
// Support for ReLU, LeakyReLU and bypass follows the published design; the
// LeakyReLU slope of 1/8 is this design's choice.
module activation
  import cnn_pkg::*;
#(
  parameter int unsigned NO    = NCH,
  parameter int unsigned TAG_W = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  act_mode_e        mode,
  input  logic             in_valid,
  input  pix_t             in_pix [NO],
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output pix_t             out_pix [NO],
  output logic [TAG_W-1:0] out_tag
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int o = 0; o < NO; o++) out_pix[o] <= '0;
    end else begin
      out_valid <= in_valid;
      out_tag   <= in_tag;
      for (int o = 0; o < NO; o++) begin
        if (in_pix[o] >= 0 || mode == ACT_NONE) out_pix[o] <= in_pix[o];
        else if (mode == ACT_RELU)              out_pix[o] <= '0;
        else                                    out_pix[o] <= in_pix[o] >>> 3;
      end
    end
  end
endmodule

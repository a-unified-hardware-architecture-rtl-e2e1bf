// pe_array: the process element array.
//
// NI x NO process elements: element (o, i) applies kernel K[o][i] to input
// channel i of the window, so the 3x3 kernel loop is fully unrolled inside
// each element, NI input channels (one 64-bit word) and NO output channels
// are unrolled across elements.  A reduction stage adds the NI element
// results of each output channel and each of the four output lanes.
// win holds 64-bit words; channel i is bits 8*i+7 : 8*i.  sum[o][0] is the
// convolution result of output channel o; in deconvolution mode
// sum[o][0..3] are the four output pixels of the 2x2 block (see
// process_element).  Latency: three cycles (two in the elements, one in the
// reduction).
// With the default 8 x 8 elements the array has 576 multipliers, matching
// the DSP count of the published implementation; the 8 x 8 split and the
// reduction stage are this design's reading of it.
module pe_array
  import cnn_pkg::*;
#(
  parameter int unsigned NI = NCH,
  parameter int unsigned NO = NCH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  op_mode_e                mode,
  input  logic                    in_valid,
  input  word_t                   win    [3][3],
  input  pix_t                    weight [NO][NI][KTAPS],
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] sum    [NO][4]
);
  pix_t                   chwin [NI][3][3];
  logic signed [PE_W-1:0] q     [NO][NI][4];
  logic [NO*NI-1:0]       pv;
  logic signed [ACC_W-1:0] red  [NO][4];

  always_comb begin
    for (int i = 0; i < NI; i++)
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) chwin[i][r][c] = win[r][c][i*PIX_W +: PIX_W];
  end

  for (genvar o = 0; o < NO; o++) begin : g_o
    for (genvar i = 0; i < NI; i++) begin : g_i
      process_element u_pe (
        .clk, .rst_n, .mode, .in_valid,
        .win       (chwin[i]),
        .w         (weight[o][i]),
        .out_valid (pv[o*NI + i]),
        .q         (q[o][i])
      );
    end
  end

  always_comb begin
    for (int o = 0; o < NO; o++)
      for (int l = 0; l < 4; l++) begin
        red[o][l] = '0;
        for (int i = 0; i < NI; i++) red[o][l] += ACC_W'(q[o][i][l]);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int o = 0; o < NO; o++)
        for (int l = 0; l < 4; l++) sum[o][l] <= '0;
    end else begin
      out_valid <= pv[0];
      sum       <= red;
    end
  end
endmodule

// process_element: nine multipliers and an adder tree shared by convolution
// and deconvolution.
//
// Multiplier k (k = 3*ky + kx) always uses kernel tap K[ky][kx]; only the
// pixel routed to it depends on the mode.
//  - Convolution: multiplier k gets window pixel win[ky][kx]; the tree sums
//    all nine products into one output pixel (q[0]).
//  - Deconvolution (kernel already rotated by 180 degrees): the 2x2 patch
//    a = win[0][0], b = win[0][1], c = win[1][0], d = win[1][1] of the
//    top/left-padded input is routed so that
//      q[0] = a*K11 + b*K13 + c*K31 + d*K33   (output pixel 2i,   2j)
//      q[1] = b*K12 + d*K32                   (output pixel 2i,   2j+1)
//      q[2] = c*K21 + d*K23                   (output pixel 2i+1, 2j)
//      q[3] = d*K22                           (output pixel 2i+1, 2j+1)
//    which is nine multiplications and five additions.
// The adder tree is arranged so that the deconvolution sums are its inner
// nodes: (K11+K13), (K31+K33), (K12+K32), (K21+K23) at the first level, their
// pairwise sums at the second, and K22 added last.  The same eight adders
// therefore serve both modes and no extra adder is needed.
// Timing: products are registered, then the tree is registered: q is valid
// two cycles after in_valid.  q[1..3] are don't-care in convolution mode.
// The 9-multiplier / adder-tree structure and equations follow the
// published design; the tree ordering and the pipelining are this design's.
module process_element
  import cnn_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  op_mode_e               mode,
  input  logic                   in_valid,
  input  pix_t                   win [3][3],
  input  pix_t                   w   [KTAPS],
  output logic                   out_valid,
  output logic signed [PE_W-1:0] q   [4]
);
  pix_t                         mpix [KTAPS];
  logic signed [PROD_W-1:0]     p    [KTAPS];
  logic                         v1;
  op_mode_e                     mode1;
  logic signed [PE_W-1:0]       s1a, s1b, s1c, s1d, s2a, s2b, s3, s4;

  // pixel routing to the nine multipliers
  always_comb begin
    if (mode == MODE_CONV) begin
      for (int k = 0; k < KTAPS; k++) mpix[k] = win[k/3][k%3];
    end else begin
      mpix[0] = win[0][0];  // a -> K11
      mpix[1] = win[0][1];  // b -> K12
      mpix[2] = win[0][1];  // b -> K13
      mpix[3] = win[1][0];  // c -> K21
      mpix[4] = win[1][1];  // d -> K22
      mpix[5] = win[1][1];  // d -> K23
      mpix[6] = win[1][0];  // c -> K31
      mpix[7] = win[1][1];  // d -> K32
      mpix[8] = win[1][1];  // d -> K33
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1    <= 1'b0;
      mode1 <= MODE_CONV;
      for (int k = 0; k < KTAPS; k++) p[k] <= '0;
    end else begin
      v1    <= in_valid;
      mode1 <= mode;
      for (int k = 0; k < KTAPS; k++) p[k] <= mpix[k] * w[k];
    end
  end

  // adder tree
  always_comb begin
    s1a = PE_W'(p[0]) + PE_W'(p[2]);
    s1b = PE_W'(p[6]) + PE_W'(p[8]);
    s1c = PE_W'(p[1]) + PE_W'(p[7]);
    s1d = PE_W'(p[3]) + PE_W'(p[5]);
    s2a = s1a + s1b;
    s2b = s1c + s1d;
    s3  = s2a + s2b;
    s4  = s3 + PE_W'(p[4]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < 4; l++) q[l] <= '0;
    end else begin
      out_valid <= v1;
      q[0] <= (mode1 == MODE_CONV) ? s4 : s2a;
      q[1] <= s1c;
      q[2] <= s1d;
      q[3] <= PE_W'(p[4]);
    end
  end
endmodule

// weight_buffer: kernel and batch-norm parameter store of the PE array.
//
// The input DMA writes the layer's parameters word by word (wr_en/wr_addr).
// A weight set is WSET_WORDS = 72 words: the 8 x 8 x 3 x 3 bytes for one
// (input group, output group) pair, byte n = (o*8 + i)*9 + ky*3 + kx, byte 0
// in bits 7:0 of word 0.  A batch-norm set is BN_WORDS = 6 words: words 0-1
// hold the eight 16-bit scales (channel 0 in bits 15:0 of word 0), words 2-5
// the eight 32-bit biases (channel 0 in bits 31:0 of word 2).
// load copies the weight set at w_base and the BN set at bn_base into the
// output registers that feed the PE array: 78 reads, busy high meanwhile,
// and done pulses 81 cycles after the load cycle, once the last word is in.  The memory read has
// one cycle of latency, like a block RAM.  The outputs keep their values
// until the next load.
// The published design names this buffer; its layout, depth and the
// register stage are this design's choices.
module weight_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  word_t                    wr_data,
  input  logic                     load,
  input  logic [$clog2(DEPTH)-1:0] w_base,
  input  logic [$clog2(DEPTH)-1:0] bn_base,
  output logic                     busy,
  output logic                     done,
  output pix_t                     weight   [NCH][NCH][KTAPS],  // [o][i][k]
  output logic signed [BNS_W-1:0]  bn_scale [NCH],
  output logic signed [BNB_W-1:0]  bn_bias  [NCH]
);
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NWORD = WSET_WORDS + BN_WORDS;

  word_t mem [DEPTH];
  word_t rd_q;
  logic [AW-1:0] wb_q, bb_q;
  logic [$clog2(NWORD+1)-1:0] cnt;
  logic       rd_v;
  logic [$clog2(NWORD+1)-1:0] rd_idx;
  logic [WSET_WORDS*WORD_W-1:0] wset;
  logic [BN_WORDS*WORD_W-1:0]   bset;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_q <= mem[(32'(cnt) < WSET_WORDS) ? AW'(wb_q + AW'(cnt)) : AW'(bb_q + AW'(cnt - WSET_WORDS))];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      cnt    <= '0;
      rd_v   <= 1'b0;
      rd_idx <= '0;
      wb_q   <= '0;
      bb_q   <= '0;
      wset   <= '0;
      bset   <= '0;
    end else begin
      done <= 1'b0;
      rd_v <= 1'b0;
      if (load && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
        wb_q <= w_base;
        bb_q <= bn_base;
      end else if (busy && 32'(cnt) < NWORD) begin
        rd_v   <= 1'b1;
        rd_idx <= cnt;
        cnt    <= cnt + 1'b1;
      end
      if (rd_v) begin
        if (32'(rd_idx) < WSET_WORDS) wset[rd_idx*WORD_W +: WORD_W] <= rd_q;
        else                     bset[(32'(rd_idx)-WSET_WORDS)*WORD_W +: WORD_W] <= rd_q;
        if (32'(rd_idx) == NWORD - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int o = 0; o < NCH; o++) begin
      for (int i = 0; i < NCH; i++)
        for (int k = 0; k < KTAPS; k++)
          weight[o][i][k] = wset[((o*NCH + i)*KTAPS + k)*PIX_W +: PIX_W];
      bn_scale[o] = bset[o*BNS_W +: BNS_W];
      bn_bias[o]  = bset[2*WORD_W + o*BNB_W +: BNB_W];
    end
  end
endmodule

// psum_buffer: on-chip partial-sum memory for input-channel tiling.
//
// A layer with more input channels than the array processes at once is
// computed in passes, one per group of eight input channels; each pass adds
// its contribution to the partial sums kept here, so partial sums never go to
// off-chip memory.  Every input is a read-modify-write of one entry (NO
// accumulators of ACC_W bits): with in_first the stored value is ignored and
// the entry starts from the new data.  The sum is written back and also
// presented on the output, with the tag, two cycles after the input.
// A write-to-read forwarding path makes back-to-back accesses to the same
// entry correct.  One access per cycle.
// Keeping partial sums in on-chip block RAM follows the published design;
// the memory organisation and the pipeline are this design's.
module psum_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned NO    = NCH,
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned TAG_W = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic [$clog2(DEPTH)-1:0] in_addr,
  input  logic signed [ACC_W-1:0]  in_data [NO],
  input  logic [TAG_W-1:0]         in_tag,
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out_data [NO],
  output logic [TAG_W-1:0]         out_tag
);
  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [NO*ACC_W-1:0] entry_t;

  entry_t                  mem [DEPTH];
  entry_t                  rd_q;
  logic                    a_valid, a_first, a_fwd;
  logic [AW-1:0]           a_addr;
  logic signed [ACC_W-1:0] a_data [NO];
  logic [TAG_W-1:0]        a_tag;
  entry_t                  sum_e;

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      logic signed [ACC_W-1:0] old;
      old = a_first ? '0 : (a_fwd ? out_data[o] : $signed(rd_q[o*ACC_W +: ACC_W]));
      sum_e[o*ACC_W +: ACC_W] = old + a_data[o];
    end
  end

  always_ff @(posedge clk) begin
    rd_q <= mem[in_addr];
    if (a_valid) mem[a_addr] <= sum_e;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid   <= 1'b0;
      a_first   <= 1'b0;
      a_fwd     <= 1'b0;
      a_addr    <= '0;
      a_tag     <= '0;
      out_valid <= 1'b0;
      out_tag   <= '0;
      for (int o = 0; o < NO; o++) begin
        a_data[o]   <= '0;
        out_data[o] <= '0;
      end
    end else begin
      a_valid <= in_valid;
      a_first <= in_first;
      a_addr  <= in_addr;
      a_data  <= in_data;
      a_tag   <= in_tag;
      // the entry being written now is the one read now: take the new sum
      a_fwd   <= a_valid && (a_addr == in_addr);
      out_valid <= a_valid;
      out_tag   <= a_tag;
      if (a_valid)
        for (int o = 0; o < NO; o++) out_data[o] <= $signed(sum_e[o*ACC_W +: ACC_W]);
    end
  end
endmodule

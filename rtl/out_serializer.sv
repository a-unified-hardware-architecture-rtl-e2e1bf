// out_serializer: puts the PE array results on the one-pixel-per-cycle
// output path.
//
// In convolution mode each input carries one output pixel (lane 0) and is
// passed on after one register stage with its address and tag.  In
// deconvolution mode each input carries the four pixels of a 2x2 output
// block, produced in parallel; they leave one per cycle over the next four
// cycles, in the order (2i,2j), (2i,2j+1), (2i+1,2j), (2i+1,2j+1), with
// addresses addr, addr+1, addr+row_w, addr+row_w+1, where addr is the
// address of the block's top-left pixel and row_w the output row width.
// The sender must leave at least four cycles between deconvolution inputs
// (asserted).  The tag travels unchanged with every pixel.
// Sending the four deconvolution pixels to the output buffer serially follows
// the published design; the ordering and addressing are this design's.
module out_serializer
  import cnn_pkg::*;
#(
  parameter int unsigned NO     = NCH,
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned TAG_W  = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  op_mode_e                mode,
  input  logic [ADDR_W-1:0]       row_w,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] in_data [NO][4],
  input  logic [ADDR_W-1:0]       in_addr,
  input  logic [TAG_W-1:0]        in_tag,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] out_data [NO],
  output logic [ADDR_W-1:0]       out_addr,
  output logic [TAG_W-1:0]        out_tag
);
  logic signed [ACC_W-1:0] hold [NO][4];
  logic [ADDR_W-1:0]       haddr;
  logic [TAG_W-1:0]        htag;
  logic [1:0]              lane;
  logic                    active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_addr  <= '0;
      out_tag   <= '0;
      haddr     <= '0;
      htag      <= '0;
      lane      <= '0;
      active    <= 1'b0;
      for (int o = 0; o < NO; o++) begin
        out_data[o] <= '0;
        for (int l = 0; l < 4; l++) hold[o][l] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (in_valid && mode == MODE_CONV) begin
        out_valid <= 1'b1;
        out_addr  <= in_addr;
        out_tag   <= in_tag;
        for (int o = 0; o < NO; o++) out_data[o] <= in_data[o][0];
      end else if (in_valid) begin
        // first pixel of the block leaves now, the rest are held
        hold      <= in_data;
        haddr     <= in_addr;
        htag      <= in_tag;
        lane      <= 2'd1;
        active    <= 1'b1;
        out_valid <= 1'b1;
        out_addr  <= in_addr;
        out_tag   <= in_tag;
        for (int o = 0; o < NO; o++) out_data[o] <= in_data[o][0];
      end else if (active) begin
        out_valid <= 1'b1;
        out_tag   <= htag;
        case (lane)
          2'd1:    out_addr <= haddr + 1'b1;
          2'd2:    out_addr <= haddr + row_w;
          default: out_addr <= haddr + row_w + 1'b1;
        endcase
        for (int o = 0; o < NO; o++) out_data[o] <= hold[o][lane];
        lane <= lane + 1'b1;
        if (lane == 2'd3) active <= 1'b0;
      end
    end
  end

  a_rate: assert property (@(posedge clk) disable iff (!rst_n) (in_valid && mode == MODE_DECONV) |-> !active);
endmodule

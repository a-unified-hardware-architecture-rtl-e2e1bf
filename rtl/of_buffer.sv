// of_buffer: output feature-map buffer.
//
// The output path writes one pixel position (eight 8-bit channels, one
// 64-bit word) per cycle at any address, so deconvolution blocks and pooled
// maps land in raster order whatever order they are produced in.  start
// drains words 0 .. count-1 in order onto an AXI-Stream style output
// (m_valid/m_ready, m_last on the final word) towards the output DMA; busy
// is high until the last word has been accepted, when done pulses.  The
// memory read is registered and advances only when the output register is
// empty or being accepted.
// The buffer between the pooling unit and the output DMA follows the
// published design; its depth and the drain interface are this design's.
module of_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 16384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  pix_t                     wr_pix [NCH],
  input  logic                     start,
  input  logic [$clog2(DEPTH):0]   count,
  output word_t                    m_data,
  output logic                     m_valid,
  output logic                     m_last,
  input  logic                     m_ready,
  output logic                     busy,
  output logic                     done
);
  localparam int unsigned AW = $clog2(DEPTH);

  word_t          mem [DEPTH];
  word_t          wword;
  logic [AW:0]    ptr, cnt_q;
  logic           advance;

  always_comb
    for (int c = 0; c < NCH; c++) wword[c*PIX_W +: PIX_W] = wr_pix[c];

  assign advance = busy && (ptr < cnt_q) && (!m_valid || m_ready);

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wword;
    if (advance) m_data <= mem[AW'(ptr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr     <= '0;
      cnt_q   <= '0;
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        ptr   <= '0;
        cnt_q <= count;
      end else if (advance) begin
        m_valid <= 1'b1;
        m_last  <= (ptr == cnt_q - 1'b1);
        ptr     <= ptr + 1'b1;
      end else if (m_valid && m_ready) begin
        m_valid <= 1'b0;
        m_last  <= 1'b0;
        if (m_last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             (m_valid && !m_ready) |=> (m_valid && $stable(m_data)));
endmodule

// sync_fifo: single-clock first-word-fall-through FIFO used for the rows of
// the line buffer.
//
// The head entry is visible on rd_data whenever empty is low; pop removes it.
// Push and pop may happen in the same cycle, also when the FIFO is full.
// Besides empty/full it reports its fill level and a "row full" flag that is
// high when the level equals the programmable row length row_len, so one
// FIFO of DEPTH entries can hold one image row of any width up to DEPTH.
// clear empties the FIFO synchronously.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rd_data,
  input  logic [$clog2(DEPTH+1)-1:0] row_len,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                       empty,
  output logic                       full,
  output logic                       row_full
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty    = (level == 0);
  assign full     = (level == ($clog2(DEPTH+1))'(DEPTH));
  assign row_full = (level == row_len);
  assign rd_data  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else if (clear) begin
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      level <= level + LW'(push) - LW'(pop);
    end
  end

  // Protocol checks: never pop an empty FIFO, never push a full one.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
endmodule

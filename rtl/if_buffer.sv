// if_buffer: double-buffered input feature-map buffer.
//
// Each entry is one 3x1 column vector (three 64-bit words: top, middle and
// bottom pixel of a window column, eight channels each), the form in which
// the line buffer delivers the tile.  Two banks work as a ping-pong pair:
// the writer fills the bank selected by its own pointer while the reader
// works on the other one.  wr_commit marks the written bank full and moves
// the writer to the other bank; rd_release marks the read bank empty and
// moves the reader on.  wr_ready is high when the writer's bank is empty,
// rd_ready when the reader's bank is full.  Reads are registered: rd_data is
// valid the cycle after rd_en.
// Two IF banks behind one output mux follow the published block diagram;
// the bank depth and the full/empty handshake are this design's choices.
module if_buffer
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write side (line buffer)
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  word_t                    wr_data [3],
  input  logic                     wr_commit,
  output logic                     wr_ready,
  // read side (shift register / PE array)
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output word_t                    rd_data [3],
  input  logic                     rd_release,
  output logic                     rd_ready
);
  typedef logic [3*WORD_W-1:0] entry_t;

  entry_t mem0 [DEPTH];
  entry_t mem1 [DEPTH];
  logic   wsel, rsel;
  logic [1:0] full;
  entry_t rd_q;

  assign wr_ready = !full[wsel];
  assign rd_ready = full[rsel];

  always_ff @(posedge clk) begin
    if (wr_en && !wsel) mem0[wr_addr] <= {wr_data[0], wr_data[1], wr_data[2]};
    if (wr_en &&  wsel) mem1[wr_addr] <= {wr_data[0], wr_data[1], wr_data[2]};
    if (rd_en) rd_q <= rsel ? mem1[rd_addr] : mem0[rd_addr];
  end

  assign rd_data[0] = rd_q[3*WORD_W-1 -: WORD_W];
  assign rd_data[1] = rd_q[2*WORD_W-1 -: WORD_W];
  assign rd_data[2] = rd_q[WORD_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel <= 1'b0;
      rsel <= 1'b0;
      full <= 2'b00;
    end else begin
      if (wr_commit) begin
        full[wsel] <= 1'b1;
        wsel       <= ~wsel;
      end
      if (rd_release) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
    end
  end

  a_commit_empty:  assert property (@(posedge clk) disable iff (!rst_n) wr_commit  |-> !full[wsel]);
  a_release_full:  assert property (@(posedge clk) disable iff (!rst_n) rd_release |->  full[rsel]);
  a_write_allowed: assert property (@(posedge clk) disable iff (!rst_n) wr_en      |-> !full[wsel]);
  a_addr_w: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (32'(wr_addr) < DEPTH));
  a_addr_r: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> (32'(rd_addr) < DEPTH));
endmodule

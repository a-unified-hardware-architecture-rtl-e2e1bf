// config_regfile: register file of pre-loaded operation settings.
//
// The host writes one 64-bit job descriptor (cnn_pkg::job_t: mode, tile
// size, padding mode, channel groups, activation, pooling, batch-norm shift)
// per entry before starting the accelerator; the system controller then reads
// the entries in order and executes them. 
// The read port is combinational.
// Pre-loading the settings into a register file that the controller reads
// sequentially follows the published design; the descriptor format and the
// simple write port (in place of a bus interface) are this design's.
module config_regfile
  import cnn_pkg::*;
#(
  parameter int unsigned NJOBS = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(NJOBS)-1:0] waddr,
  input  logic [63:0]              wdata,
  input  logic [$clog2(NJOBS)-1:0] raddr,
  output job_t                     rdata
);
  job_t regs [NJOBS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NJOBS; j++) regs[j] <= '0;
    end else if (we) begin
      regs[waddr] <= job_t'(wdata);
    end
  end

  assign rdata = regs[raddr];
endmodule

// btpe_local_buffer -- the BTPE's local buffer.
//
// Holds the B-operand words (weights or error values, 512 bits each) of the current job
// after the scheduler has fetched them from the global SRAM, so they can be copied into every
// lane's input buffer B without fetching them again per lane. One synchronous write port and
// one asynchronous (same-cycle) read port. Its role as the staging store in front of the data
// rearranger follows the block diagram of the source design; size and ports are this
// design's choices.
module btpe_local_buffer #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  assign rdata = mem[raddr];

endmodule

// local_sram -- the 256 KB local SRAM attached to a BTP-dataflow lane.
//
// Lane l writes its aggregated results here; lane l+1 reads them back as the previous
// timestep's outputs for computation reuse. One write port (owning lane) and one read port
// (next lane); registered read data, available the clock after the address.
// The 256 KB capacity follows the source design. The 512-bit word (4096 words) matches the
// lane's output beat and is this design's choice. This is a plain array, standing in for the
// compiled SRAM macro of a real chip.
module local_sram #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule

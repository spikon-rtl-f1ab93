// lane_buffer -- a lane's input buffer (A: 2048-bit words, B: 512-bit words).
//
// Simple dual-port memory: one write port filled by the BTPE data rearranger and one read
// port read by the lane controller, with the read data registered (available the clock
// after the address). The widths follow the source design; the depth, which bounds the data
// volume of one lane job, is not published and is this design's choice.
module lane_buffer #(
  parameter int unsigned WIDTH = 2048,
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

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule

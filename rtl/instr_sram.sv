// instr_sram -- the SNN core's 4 KB instruction memory (1024 x 32 bit).
//
// One write port for loading a program from outside the core and one read port for the
// fetcher; read data is registered and appears the clock after the address. Size follows
// the source design; the program-load port is this design's choice. A plain array standing in
// for the compiled SRAM macro.
module instr_sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 32,
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

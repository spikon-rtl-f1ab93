// global_sram -- the accelerator's 1 MB on-chip global SRAM.
//
// Single-port memory of 4096 words of 2048 bits (64 FP32 values per word, the width of an
// SNN-core vector and of a lane's input-buffer-A word). One access per clock: a write when
// en and we are high, otherwise a read whose data is registered and appears the clock after.
// The 1 MB capacity follows the source design; the word width is this design's choice. A
// plain array standing in for the compiled SRAM macro.
module global_sram #(
  parameter int unsigned WIDTH = 2048,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata <= mem[addr];
    end
  end

endmodule

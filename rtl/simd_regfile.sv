// simd_regfile -- the SNN core's register file: 32 registers of 512 bits.
//
// One 512-bit register holds 16 FP32 values, while the executor has 64 FP32 units. A
// vector operand is therefore a group of four consecutive registers (2048 bits); register
// index r names group r[4:2], and r[1:0] is ignored. Two combinational read ports (one
// group each) and one write port (one group, written at the clock edge). The register count
// and width follow the source design; grouping registers in fours is this design's way to
// feed 64 units from 512-bit registers. Reset clears all registers.
module simd_regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned WIDTH = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [4:0]         ra1,
  input  logic [4:0]         ra2,
  output logic [4*WIDTH-1:0] rd1,
  output logic [4*WIDTH-1:0] rd2,
  input  logic               we,
  input  logic [4:0]         wa,
  input  logic [4*WIDTH-1:0] wd
);

  logic [WIDTH-1:0] regs [NREGS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      for (int i = 0; i < 4; i++) regs[{wa[4:2], 2'(i)}] <= wd[i*WIDTH +: WIDTH];
    end
  end

  always_comb begin
    for (int i = 0; i < 4; i++) begin
      rd1[i*WIDTH +: WIDTH] = regs[{ra1[4:2], 2'(i)}];
      rd2[i*WIDTH +: WIDTH] = regs[{ra2[4:2], 2'(i)}];
    end
  end

endmodule

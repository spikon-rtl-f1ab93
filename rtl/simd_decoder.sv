// simd_decoder -- instruction decoder of the SNN core.
//
// Splits a 32-bit instruction into opcode [31:26], rd [25:21], rs1 [20:16], rs2 [15:11] and
// global-SRAM address [11:0] (loads and stores only; a store names the register it stores
// in the rd field) and classifies it: which registers it reads and writes, whether
// it loads, stores or halts, and which FP32-unit operation it needs. Unknown opcodes decode
// as no-ops. The core runs a small custom ISA; its encoding here is this design's own,
// since the source design does not publish one. Purely combinational.
module simd_decoder
  import spikon_pkg::*;
(
  input  logic [31:0] instr,
  output dec_instr_t  dec
);

  always_comb begin
    dec           = '0;
    dec.rd        = instr[25:21];
    dec.rs1       = instr[20:16];
    dec.rs2       = instr[15:11];
    dec.addr      = instr[11:0];
    dec.fu_op     = FU_PASS;
    unique case (instr[31:26])
      OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_MAX, OP_MIN, OP_LIF, OP_FIRE, OP_RESET, OP_SG: begin
        dec.op        = opcode_e'(instr[31:26]);
        dec.uses_rs1  = 1'b1;
        dec.uses_rs2  = 1'b1;
        dec.writes_rd = 1'b1;
        unique case (instr[31:26])
          OP_ADD:   dec.fu_op = FU_ADD;
          OP_SUB:   dec.fu_op = FU_SUB;
          OP_MUL:   dec.fu_op = FU_MUL;
          OP_DIV:   dec.fu_op = FU_DIV;
          OP_MAX:   dec.fu_op = FU_MAX;
          OP_MIN:   dec.fu_op = FU_MIN;
          OP_LIF:   dec.fu_op = FU_LIF;
          OP_FIRE:  dec.fu_op = FU_FIRE;
          OP_RESET: dec.fu_op = FU_RESET;
          default:  dec.fu_op = FU_SG;
        endcase
      end
      OP_SQRT, OP_RSUM, OP_RMAX: begin
        dec.op        = opcode_e'(instr[31:26]);
        dec.fu_op     = (instr[31:26] == OP_SQRT) ? FU_SQRT
                      : (instr[31:26] == OP_RSUM) ? FU_RSUM : FU_RMAX;
        dec.uses_rs1  = 1'b1;
        dec.writes_rd = 1'b1;
      end
      OP_LD: begin
        dec.op        = OP_LD;
        dec.is_load   = 1'b1;
        dec.writes_rd = 1'b1;
      end
      OP_ST: begin
        dec.op        = OP_ST;
        dec.is_store  = 1'b1;
        dec.uses_rs2  = 1'b1;
        dec.rs2       = instr[25:21];     // stored register sits in the rd field
      end
      OP_HALT: begin
        dec.op      = OP_HALT;
        dec.is_halt = 1'b1;
      end
      default: dec.op = OP_NOP;
    endcase
  end

endmodule

// tb_simd_decoder -- self-checking testbench of the SNN core's instruction decoder: every
// opcode with random register fields, checked against the expected fields and flags.
module tb_simd_decoder;
  import spikon_pkg::*;
  logic [31:0] instr;
  dec_instr_t dec;
  int checks = 0, failures = 0;

  simd_decoder dut (.instr, .dec);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [5:0] op;
      logic alu, ld, st, halt, sq;
      fu_op_e f;
      op = 6'($urandom_range(63, 0));
      if (i % 3 == 0) op = 6'($urandom_range(17, 0));
      instr = {op, 26'($urandom)};
      #1;
      alu = op >= 1 && op <= 13;
      sq = op == 5 || op == 12 || op == 13;      // one source operand
      ld = op == 16; st = op == 17; halt = op == 63;
      case (op)
        1: f = FU_ADD;  2: f = FU_SUB;  3: f = FU_MUL;  4: f = FU_DIV;  5: f = FU_SQRT;
        6: f = FU_MAX;  7: f = FU_MIN;  8: f = FU_LIF;  9: f = FU_FIRE; 10: f = FU_RESET;
        11: f = FU_SG;  12: f = FU_RSUM; 13: f = FU_RMAX; default: f = FU_PASS;
      endcase
      checks += 7;
      if (dec.fu_op != f) begin failures++; $display("op %0d: fu_op %s", op, dec.fu_op.name()); end
      if (dec.writes_rd != (alu || ld)) failures++;
      if (dec.uses_rs1 != alu) failures++;
      if (dec.uses_rs2 != ((alu && !sq) || st)) failures++;
      if (dec.is_load != ld || dec.is_store != st || dec.is_halt != halt) failures++;
      if (dec.rd != instr[25:21] || dec.rs1 != instr[20:16] || dec.addr != instr[11:0]) failures++;
      if (dec.rs2 != (st ? instr[25:21] : instr[15:11])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

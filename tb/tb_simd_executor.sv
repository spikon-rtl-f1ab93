// tb_simd_executor -- self-checking testbench of the 64-unit SIMD executor: random vectors
// for add, mul, lif and fire, each element checked against a reference computed here, and
// the two reductions (sum, max), whose reference follows the same pairwise summation order.
module tb_simd_executor;
  import spikon_pkg::*;
  import tb_fp_pkg::*;
  fu_op_e op;
  logic [31:0] beta;
  logic [2047:0] va, vb, vr;
  int checks = 0, failures = 0;

  simd_executor dut (.op, .beta, .va, .vb, .vr);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beta = r2f(0.09);
    for (int i = 0; i < 80; i++) begin
      for (int k = 0; k < 64; k++) begin va[k*32 +: 32] = rand_fp(5); vb[k*32 +: 32] = rand_fp(5); end
      op = (i % 4 == 0) ? FU_ADD : (i % 4 == 1) ? FU_MUL : (i % 4 == 2) ? FU_LIF : FU_FIRE;
      #1;
      for (int k = 0; k < 64; k++) begin
        real x, y;
        logic [31:0] e;
        x = f2r(va[k*32 +: 32]); y = f2r(vb[k*32 +: 32]);
        case (op)
          FU_ADD:  e = r2f(x + y);
          FU_MUL:  e = r2f(x * y);
          FU_LIF:  e = r2f(f2r(r2f(f2r(beta) * x)) + y);
          default: e = (x >= y) ? FP_ONE : FP_ZERO;
        endcase
        checks++;
        if (ulp_diff(vr[k*32 +: 32], e) > 1) failures++;
      end
    end
    for (int i = 0; i < 60; i++) begin
      real lvl [64];
      real mx;
      logic [31:0] es, em;
      for (int k = 0; k < 64; k++) begin
        va[k*32 +: 32] = rand_fp(i % 3 == 0 ? 1 : 6);
        if (i % 5 == 1 && k > 0) va[k*32 +: 32] = va[31:0];       // ties
        vb[k*32 +: 32] = rand_fp(5);
      end
      for (int k = 0; k < 64; k++) lvl[k] = f2r(va[k*32 +: 32]);
      for (int n = 32; n >= 1; n = n / 2)
        for (int j = 0; j < n; j++) lvl[j] = f2r(r2f(lvl[2*j] + lvl[2*j+1]));
      es = r2f(lvl[0]);
      mx = f2r(va[31:0]);
      for (int k = 1; k < 64; k++) if (f2r(va[k*32 +: 32]) > mx) mx = f2r(va[k*32 +: 32]);
      em = r2f(mx);
      op = FU_RSUM; #1;
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (ulp_diff(vr[k*32 +: 32], es) > 1) begin
          failures++;
          if (k == 0) $display("rsum %h vs %h", vr[31:0], es);
        end
      end
      op = FU_RMAX; #1;
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (vr[k*32 +: 32] != em && f2r(vr[k*32 +: 32]) != mx) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fp32_unit -- self-checking testbench of the SIMD FP32 unit.
// Random operands for every operation; expected results are computed in double precision
// and rounded to FP32 (tb_fp_pkg). Arithmetic must match to within one unit in the last
// place; compare-based operations (max, min, fire, reset selection) must match exactly.
module tb_fp32_unit;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  fu_op_e op;
  logic [31:0] x, y, beta, r, e;
  int checks = 0, failures = 0;
  real rx, ry, rb, t;

  fp32_unit dut (.op, .x, .y, .beta, .r);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beta = r2f(0.09);   // leak constant of the evaluated networks
    for (int i = 0; i < 3000; i++) begin
      x = rand_fp(8);
      y = (i % 7 == 0) ? x ^ 32'h8000_0000 : rand_fp(8);   // exact cancellation too
      if (i % 11 == 0) y = {x[31], x[30:23] - 8'd1, 23'($urandom)};
      rx = f2r(x); ry = f2r(y); rb = f2r(beta);
      for (int o = 0; o <= int'(FU_SG); o++) begin
        op = fu_op_e'(o);
        case (op)
          FU_ADD:   e = r2f(rx + ry);
          FU_SUB:   e = r2f(rx - ry);
          FU_MUL:   e = r2f(rx * ry);
          FU_DIV:   e = r2f(rx / ry);
          FU_SQRT:  e = (rx < 0.0) ? FP_QNAN : r2f($sqrt(rx));
          FU_MAX:   e = (rx >= ry) ? x : y;
          FU_MIN:   e = (rx >= ry) ? y : x;
          FU_LIF:   e = r2f(f2r(r2f(rb * rx)) + ry);
          FU_FIRE:  e = (rx >= ry) ? FP_ONE : FP_ZERO;
          FU_RESET: e = (rx >= ry) ? r2f(rx - ry) : x;
          FU_SG: begin
            t = f2r(r2f(rx - ry));
            t = 1.0 - ((t < 0.0) ? -t : t);
            e = (t < 0.0) ? FP_ZERO : r2f(t);
          end
          default:  e = x;
        endcase
        #1;
        checks++;
        if ((r != e) && !(r[30:0] == 0 && e[30:0] == 0) && ulp_diff(r, e) > 1) begin
          failures++;
          if (failures < 20) $display("op %s x %h y %h: got %h expected %h", op.name(), x, y, r, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// fp32_unit -- one element of the SNN core's SIMD executor.
//
// A purely combinational FP32 unit. Besides general arithmetic (add, sub, mult, div, sqrt,
// max, min) it executes the LIF-neuron operations of the SNN core:
//   lif   : r = beta * x + y          charging, u_t = beta * v_{t-1} + W s_t
//   fire  : r = (x >= y) ? 1.0 : 0.0  firing,   s_t = H(u_t - theta_t)
//   reset : r = x - (x >= y ? y : 0)  resetting, v_t = u_t - s_t * theta_t
//   sg    : r = max(0, 1 - |x - y|)   triangle surrogate gradient H'(u - theta)
//   pass  : r = x                     (used by loads and stores)
// The operation list and the lif/reset/sg names follow the source design. 'fire' is this
// design's own instruction for the firing equation, and the surrogate's half-width of 1.0 is
// assumed; per-timestep thresholds theta_t arrive as the y operand, so each timestep can use
// its own learnable threshold. The result is valid in the same cycle as the operands.
module fp32_unit
  import spikon_pkg::*;
(
  input  fu_op_e      op,
  input  logic [31:0] x,
  input  logic [31:0] y,
  input  logic [31:0] beta,   // leak constant for lif
  output logic [31:0] r
);

  logic        ge;
  logic [31:0] diff, tri_v;

  assign ge    = fp_ge(x, y);
  assign diff  = fp_sub(x, y);
  assign tri_v = fp_sub(FP_ONE, {1'b0, diff[30:0]});

  always_comb begin
    unique case (op)
      FU_ADD:   r = fp_add(x, y);
      FU_SUB:   r = diff;
      FU_MUL:   r = fp_mul(x, y);
      FU_DIV:   r = fp_div(x, y);
      FU_SQRT:  r = fp_sqrt(x);
      FU_MAX:   r = ge ? x : y;
      FU_MIN:   r = ge ? y : x;
      FU_LIF:   r = fp_add(fp_mul(beta, x), y);
      FU_FIRE:  r = ge ? FP_ONE : FP_ZERO;
      FU_RESET: r = ge ? diff : x;
      FU_SG:    r = tri_v[31] ? FP_ZERO : tri_v;
      default:  r = x;
    endcase
  end

endmodule

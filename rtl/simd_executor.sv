// simd_executor -- the SNN core's executor: NUNITS FP32 units working in lock-step, plus a
// reduction tree across the elements of one vector.
//
// Element-wise operations apply one operation to every element of two 2048-bit vectors
// (64 FP32 values), e.g. the LIF update of 64 neurons at once: element k of the result comes
// from unit k working on element k of the operands. Vector-wise operations reduce the 64
// elements of va to one value and broadcast it to every element of the result:
//   rsum : sum of all elements (global average pooling, the softmax denominator, the mean
//          of a weight tile for weight centralization)
//   rmax : largest element (the softmax shift, arg-max of the output layer)
// The reduction is a balanced tree of log2(NUNITS) levels that pairs adjacent elements first:
// level 1 combines elements 2j and 2j+1, level 2 combines those results pairwise, and so on.
// The FP32 sum therefore depends on that order, which is fixed. NUNITS must be a power of two.
// The count of 64 units, and that the core performs element-wise and vector-wise operations,
// follow the source design; the two reduction operations and the tree are this design's own.
// Purely combinational; the core registers its output.
module simd_executor
  import spikon_pkg::*;
#(
  parameter int unsigned NUNITS = 64,
  parameter int unsigned LOGN   = $clog2(NUNITS)
) (
  input  fu_op_e             op,
  input  logic [31:0]        beta,
  input  logic [NUNITS*32-1:0] va,
  input  logic [NUNITS*32-1:0] vb,
  output logic [NUNITS*32-1:0] vr
);

  logic [NUNITS*32-1:0] velem;

  for (genvar k = 0; k < NUNITS; k++) begin : g_unit
    fp32_unit u_fu (.op, .x(va[k*32 +: 32]), .y(vb[k*32 +: 32]), .beta, .r(velem[k*32 +: 32]));
  end

  // level l holds NUNITS >> l partial sums (s) and partial maxima (m)
  for (genvar l = 0; l <= LOGN; l++) begin : g_lvl
    logic [(NUNITS >> l)*32-1:0] s, m;
    if (l == 0) begin : g_leaf
      assign s = va;
      assign m = va;
    end else begin : g_pair
      for (genvar j = 0; j < (NUNITS >> l); j++) begin : g_node
        logic [31:0] s0, s1, m0, m1;
        assign s0 = g_lvl[l-1].s[(2*j)*32 +: 32];
        assign s1 = g_lvl[l-1].s[(2*j+1)*32 +: 32];
        assign m0 = g_lvl[l-1].m[(2*j)*32 +: 32];
        assign m1 = g_lvl[l-1].m[(2*j+1)*32 +: 32];
        assign s[j*32 +: 32] = fp_add(s0, s1);
        assign m[j*32 +: 32] = fp_ge(m0, m1) ? m0 : m1;
      end
    end
  end

  always_comb begin
    unique case (op)
      FU_RSUM: vr = {NUNITS{g_lvl[LOGN].s}};
      FU_RMAX: vr = {NUNITS{g_lvl[LOGN].m}};
      default: vr = velem;
    endcase
  end

endmodule

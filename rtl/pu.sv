// pu -- processing unit of a BTP-dataflow lane.
//
// One PU owns one output element (output-stationary). Every cycle with 'valid' high it takes
// one operand pair (a, b) and adds a term to its partial-sum register PS:
//   sparse mode (mode = 0): a carries a ternary spike code in a[1:0] and the term is chosen
//     from 0, +b and -b. -b serves the CTCR spike differences (s_t - s_{t-1} = -1).
//   dense mode (mode = 1): the term is the FP32 product a * b (error-signal computation).
// The counting register CT counts accepted pairs; 'done' is high once the count has reached
// 'data_volume'. 'clear' empties PS and CT before a new output element.
//
// The sparse multiplexer inputs (0, +b, -b, 0), its select [a, valid], the FP32 multiplier and
// adder, the PS and CT registers, the INT increment by 1 and the data-volume comparison follow
// the published PU diagram. The 2-bit spike code (01 = +1, 10 = -1, 00 and 11 = 0), the
// clear/reset behaviour and done = (count >= data_volume) are this design's choices.
// Timing: PS and CT update at the clock edge after a valid pair; done follows CT
// combinationally, so it rises in the cycle after the last pair.
module pu
  import spikon_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,        // start a new output element
  input  logic            mode,         // 1 = dense, 0 = sparse
  input  logic            valid,        // operand pair present
  input  logic [31:0]     a,            // FP32 (dense) or spike code in [1:0] (sparse)
  input  logic [31:0]     b,            // FP32 operand
  input  logic [DV_W-1:0] data_volume,  // pairs to process
  output logic [31:0]     psum,         // PS register
  output logic [DV_W-1:0] count,        // CT register
  output logic            done
);

  logic [31:0] sparse_term, dense_a, dense_b, dense_term, term;

  // sparse path: 4:1 multiplexer selected by [a, valid]
  always_comb begin
    sparse_term = FP_ZERO;
    if (valid) begin
      unique case (a[1:0])
        2'b01:   sparse_term = b;
        2'b10:   sparse_term = {~b[31], b[30:0]};
        default: sparse_term = FP_ZERO;
      endcase
    end
  end

  // dense path: operands are forced to zero unless a valid dense pair is present
  assign dense_a    = (valid && mode) ? a : FP_ZERO;
  assign dense_b    = (valid && mode) ? b : FP_ZERO;
  assign dense_term = fp_mul(dense_a, dense_b);
  assign term       = mode ? dense_term : sparse_term;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      psum  <= FP_ZERO;
      count <= '0;
    end else if (valid) begin
      psum  <= fp_add(psum, term);
      count <= count + 1'b1;
    end
  end

  assign done = count >= data_volume;

endmodule

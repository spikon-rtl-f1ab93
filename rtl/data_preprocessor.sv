// data_preprocessor -- turns one input-buffer-A word into the 64 per-PU A operands of a lane.
//
// Dense mode: the 2048-bit word is 64 FP32 values, one per PU, passed through unchanged.
// Sparse mode: bits [63:0] hold the current timestep's spikes s_t (bit k for PU k) and bits
// [127:64] the previous timestep's spikes s_{t-1}. Without reuse the PU receives s_t as a spike
// code (01 = +1, 00 = 0). With CTCR reuse it receives the difference s_t - s_{t-1}
// (01 = +1, 10 = -1, 00 = 0), which is sparser when adjacent timesteps fire alike.
// The 2048-bit width and the difference itself follow the source design; the packing of the
// two spike vectors into the word and the spike codes are this design's choices.
// Purely combinational.
module data_preprocessor
  import spikon_pkg::*;
#(
  parameter int unsigned NPU = 64
) (
  input  logic [NPU*32-1:0] a_word,
  input  logic              mode,      // 1 = dense
  input  logic              reuse_en,  // sparse: spike difference
  output logic [NPU*32-1:0] a_pu,
  output logic [NPU-1:0]    nonzero    // sparse operand is non-zero (activity report)
);

  always_comb begin
    for (int k = 0; k < NPU; k++) begin
      logic cur, prev;
      cur  = a_word[k];
      prev = a_word[NPU + k];
      if (mode) begin
        a_pu[k*32 +: 32] = a_word[k*32 +: 32];
      end else if (reuse_en) begin
        a_pu[k*32 +: 32] = {30'd0, ~cur & prev, cur & ~prev};
      end else begin
        a_pu[k*32 +: 32] = {31'd0, cur};
      end
      nonzero[k] = a_pu[k*32 +: 2] != 2'b00;
    end
  end

endmodule

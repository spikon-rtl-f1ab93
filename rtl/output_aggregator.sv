// output_aggregator -- the lane's output aggregator (OA).
//
// Drains a lane's 64 partial sums 16 at a time (one 512-bit beat per cycle). With reuse
// enabled, each of the 16 FP32 adders adds the matching result of the previous timestep,
// read from the neighbouring lane's local SRAM, so y_t = y_{t-1} + W (s_t - s_{t-1})
// (cascade temporal computation reuse). Without reuse the partial sums pass through.
// Accumulating with the previous timestep's outputs follows the source design; the 16-wide
// beat follows the printed 512-bit width. The one-cycle registered output is this design's.
// Timing: out_valid/out_idx/out_beat appear one clock after in_valid/in_idx.
module output_aggregator
  import spikon_pkg::*;
#(
  parameter int unsigned WORDS = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [1:0]          in_idx,
  input  logic                reuse_en,
  input  logic [WORDS*32-1:0] psum_beat,
  input  logic [WORDS*32-1:0] reuse_in,
  output logic                out_valid,
  output logic [1:0]          out_idx,
  output logic [WORDS*32-1:0] out_beat
);

  logic [WORDS*32-1:0] sum;

  always_comb begin
    for (int k = 0; k < WORDS; k++)
      sum[k*32 +: 32] = reuse_en ? fp_add(psum_beat[k*32 +: 32], reuse_in[k*32 +: 32])
                                 : psum_beat[k*32 +: 32];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_beat  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_idx  <= in_idx;
        out_beat <= sum;
      end
    end
  end

endmodule

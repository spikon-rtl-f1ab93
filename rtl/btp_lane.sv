// btp_lane -- one BTP-dataflow lane of the bi-temporal parallel engine.
//
// A lane computes one timestep's share of a vector-matrix product: 64 output elements, one
// per PU (output-stationary), each reducing 'data_volume' operand pairs. Buffer A supplies
// the per-PU operands (spikes in sparse mode, FP32 values in dense mode) through the data
// pre-processor; buffer B supplies one FP32 word per PU row (16 rows in the four 4x4
// arrays). After the reduction the output aggregator drains the sums in four 512-bit beats,
// adding the previous timestep's results when CTCR reuse is on, and writes each beat to the
// lane's own local SRAM (for the next lane) and to a 2048-bit result register (for
// write-back to the global SRAM).
// Structure (buffers A/B, pre-processor, four PU arrays, aggregator, local controller) and the
// 2048b / 512b widths follow the source design; buffer depth, word packing and handshakes are
// this design's choices. Timing: see lane_controller.
module btp_lane
  import spikon_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 64,
  parameter int unsigned AW        = $clog2(BUF_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // job configuration, stable while busy
  input  logic             start,
  input  logic             mode,          // 1 = dense, 0 = sparse
  input  logic             reuse_en,      // CTCR: add the previous lane's results
  input  logic [DV_W-1:0]  data_volume,
  input  logic [11:0]      sr_base,       // local SRAM address of beat 0
  // buffer fill
  input  logic             a_we,
  input  logic [AW-1:0]    a_waddr,
  input  logic [2047:0]    a_wdata,
  input  logic             b_we,
  input  logic [AW-1:0]    b_waddr,
  input  logic [511:0]     b_wdata,
  // previous lane's local SRAM (read) and readiness
  input  logic             prev_ready,
  output logic             reuse_re,
  output logic [11:0]      reuse_raddr,
  input  logic [511:0]     reuse_rdata,
  // own local SRAM (write)
  output logic             sr_we,
  output logic [11:0]      sr_waddr,
  output logic [511:0]     sr_wdata,
  // results
  output logic [2047:0]    result,
  output logic [63:0]      nonzero_ops,   // sparse operands that were non-zero, last pair
  output logic             busy,
  output logic             done
);

  logic [AW-1:0]  raddr;
  logic [2047:0]  a_rdata, a_pu, psum;
  logic [511:0]   b_rdata, oa_beat;
  logic           pu_clear, pu_valid, oa_in_valid, oa_out_valid;
  logic [1:0]     oa_in_idx, oa_out_idx;
  logic [3:0]     arr_done;

  lane_buffer #(.WIDTH(2048), .DEPTH(BUF_DEPTH)) u_buf_a (
    .clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata), .raddr, .rdata(a_rdata));
  lane_buffer #(.WIDTH(512), .DEPTH(BUF_DEPTH)) u_buf_b (
    .clk, .we(b_we), .waddr(b_waddr), .wdata(b_wdata), .raddr, .rdata(b_rdata));

  data_preprocessor #(.NPU(64)) u_pre (
    .a_word(a_rdata), .mode, .reuse_en, .a_pu, .nonzero(nonzero_ops));

  for (genvar g = 0; g < 4; g++) begin : g_arr
    pu_array #(.ROWS(4), .COLS(4)) u_arr (
      .clk, .rst_n, .clear(pu_clear), .mode, .valid(pu_valid), .data_volume,
      .a_vec(a_pu[g*512 +: 512]), .b_row(b_rdata[g*128 +: 128]),
      .psum(psum[g*512 +: 512]), .done(arr_done[g]));
  end

  output_aggregator #(.WORDS(16)) u_oa (
    .clk, .rst_n, .in_valid(oa_in_valid), .in_idx(oa_in_idx), .reuse_en,
    .psum_beat(psum[oa_in_idx*512 +: 512]), .reuse_in(reuse_rdata),
    .out_valid(oa_out_valid), .out_idx(oa_out_idx), .out_beat(oa_beat));

  lane_controller #(.AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .data_volume, .reuse_en, .sr_base, .pu_done(&arr_done), .prev_ready,
    .oa_out_valid, .oa_out_idx, .buf_raddr(raddr), .pu_clear, .pu_valid, .oa_in_valid,
    .oa_in_idx, .reuse_re, .reuse_raddr, .busy, .done);

  assign sr_we    = oa_out_valid;
  assign sr_waddr = sr_base + 12'(oa_out_idx);
  assign sr_wdata = oa_beat;

  always_ff @(posedge clk) begin
    if (!rst_n) result <= '0;
    else if (oa_out_valid) result[oa_out_idx*512 +: 512] <= oa_beat;
  end

endmodule

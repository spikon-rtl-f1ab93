// btpe -- bi-temporal parallel engine (BTPE), the accelerator's vector-matrix engine.
//
// NLANES BTP-dataflow lanes each compute one timestep's 64 outputs of a vector-matrix
// product in parallel; with T < NLANES timesteps, lanes l, l+T, l+2T, ... serve the same
// timestep on different output slices. Lane l (l < NLANES-1) owns a local SRAM; lane l+1
// reads it to add the previous timestep's result (cascade temporal computation reuse), so
// with reuse the lanes of one group finish one after another. A scheduler FSM moves
// operands from the global SRAM through the local buffer and the data rearranger into the
// lanes and writes the results back.
// Job (btpe_job_t, sampled at 'start'): B words at b_base .. +dv-1 (low 512 bits: 16 FP32,
// one per PU row), A words for lane l at a_base + l*dv .., results of lane l to
// out_base + l. 'done' rises when the last result is written and stays high until the next
// start. 24 lanes, 23 local SRAMs of 256 KB, the lane structure, the lane grouping and the
// reuse chain follow the source design; job format and handshakes are this design's own.
module btpe
  import spikon_pkg::*;
#(
  parameter int unsigned NLANES    = 24,
  parameter int unsigned BUF_DEPTH = 64,
  parameter int unsigned SR_DEPTH  = 4096,
  parameter int unsigned AW        = $clog2(BUF_DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  btpe_job_t     job,
  output mem_req_t      mem_req,
  input  logic          mem_gnt,
  input  logic          mem_rvalid,
  input  logic [2047:0] mem_rdata,
  output logic [NLANES-1:0] lane_busy,
  output logic [NLANES-1:0] lane_reuse,
  output logic          busy,
  output logic          done
);

  btpe_job_t               cur_job;
  logic                    lb_we, fill_we;
  logic [AW-1:0]           lb_addr, lane_waddr;
  logic [511:0]            lb_rdata, lane_b;
  logic [2047:0]           lane_a, wb_data;
  logic [4:0]              fill_lane, wb_lane;
  logic [NLANES-1:0]       lane_start, lane_done, lane_active, lane_we;
  logic [NLANES*5-1:0]     lane_ts;
  logic [NLANES*2048-1:0]  lane_results;

  // per-lane local SRAM traffic
  logic [NLANES-1:0]       sr_we, reuse_re;
  logic [11:0]             sr_waddr [NLANES];
  logic [11:0]             reuse_raddr [NLANES];
  logic [511:0]            sr_wdata [NLANES];
  logic [511:0]            reuse_rdata [NLANES];
  logic [511:0]            sr_rdata [NLANES];

  btpe_scheduler #(.NLANES(NLANES), .AW(AW)) u_sched (
    .clk, .rst_n, .start, .job, .cur_job, .mem_req, .mem_gnt, .mem_rvalid,
    .wb_data, .lb_we, .lb_addr, .fill_we, .fill_lane, .lane_start, .lane_done, .lane_active,
    .wb_lane, .busy, .done);

  btpe_local_buffer #(.WIDTH(512), .DEPTH(BUF_DEPTH)) u_lbuf (
    .clk, .we(lb_we), .waddr(lb_addr), .wdata(mem_rdata[511:0]), .raddr(lb_addr),
    .rdata(lb_rdata));

  data_rearranger #(.NLANES(NLANES), .AW(AW)) u_rearr (
    .timesteps(cur_job.timesteps), .nlanes(cur_job.nlanes), .reuse(cur_job.reuse),
    .in_we(fill_we), .in_lane(fill_lane), .in_addr(lb_addr), .in_a(mem_rdata), .in_b(lb_rdata),
    .lane_we, .lane_waddr, .lane_a, .lane_b, .lane_results, .out_lane(wb_lane),
    .out_result(wb_data), .lane_ts, .lane_active, .lane_reuse);

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    logic [63:0] nonzero_ops;

    btp_lane #(.BUF_DEPTH(BUF_DEPTH)) u_lane (
      .clk, .rst_n, .start(lane_start[l]), .mode(cur_job.dense), .reuse_en(lane_reuse[l]),
      .data_volume(cur_job.data_volume), .sr_base(12'd0),
      .a_we(lane_we[l]), .a_waddr(lane_waddr), .a_wdata(lane_a),
      .b_we(lane_we[l]), .b_waddr(lane_waddr), .b_wdata(lane_b),
      .prev_ready((l == 0) ? 1'b1 : lane_done[(l == 0) ? 0 : l - 1]),
      .reuse_re(reuse_re[l]), .reuse_raddr(reuse_raddr[l]), .reuse_rdata(reuse_rdata[l]),
      .sr_we(sr_we[l]), .sr_waddr(sr_waddr[l]), .sr_wdata(sr_wdata[l]),
      .result(lane_results[l*2048 +: 2048]), .nonzero_ops, .busy(lane_busy[l]),
      .done(lane_done[l]));

    // local SRAM l: written by lane l, read by lane l+1; the last lane has none
    if (l < NLANES - 1) begin : g_sr
      local_sram #(.WIDTH(512), .DEPTH(SR_DEPTH)) u_sr (
        .clk, .we(sr_we[l]), .waddr(sr_waddr[l][$clog2(SR_DEPTH)-1:0]), .wdata(sr_wdata[l]),
        .re(reuse_re[l+1]), .raddr(reuse_raddr[l+1][$clog2(SR_DEPTH)-1:0]),
        .rdata(sr_rdata[l]));
    end else begin : g_no_sr
      assign sr_rdata[l] = '0;
    end

    if (l == 0) begin : g_first
      assign reuse_rdata[l] = '0;
    end else begin : g_next
      assign reuse_rdata[l] = sr_rdata[l-1];
    end
  end

endmodule

// data_rearranger -- routes data between the BTPE's shared paths and its lanes.
//
// Inbound, it steers an A word fetched from the global SRAM, together with the matching B
// word from the local buffer, into the input buffers of one selected lane. Outbound, it
// selects one lane's 2048-bit result for write-back. It also maps lanes to timesteps: with
// T timesteps, lane l serves timestep l mod T, so for T = 6 lanes 0, 6, 12 and 18 all serve
// timestep 0 and share the work of that timestep. A lane takes the previous timestep's
// results from lane l-1 (computation reuse) only when reuse is on and l mod T != 0.
// The lane grouping follows the source design's example; the rest is this design's choice.
// Purely combinational.
module data_rearranger #(
  parameter int unsigned NLANES = 24,
  parameter int unsigned AW     = 6
) (
  input  logic [4:0]               timesteps,   // T, 1..NLANES
  input  logic [4:0]               nlanes,      // active lanes
  input  logic                     reuse,
  // inbound
  input  logic                     in_we,
  input  logic [4:0]               in_lane,
  input  logic [AW-1:0]            in_addr,
  input  logic [2047:0]            in_a,
  input  logic [511:0]             in_b,
  output logic [NLANES-1:0]        lane_we,
  output logic [AW-1:0]            lane_waddr,
  output logic [2047:0]            lane_a,
  output logic [511:0]             lane_b,
  // outbound
  input  logic [NLANES*2048-1:0]   lane_results,
  input  logic [4:0]               out_lane,
  output logic [2047:0]            out_result,
  // lane map
  output logic [NLANES*5-1:0]      lane_ts,
  output logic [NLANES-1:0]        lane_active,
  output logic [NLANES-1:0]        lane_reuse
);

  always_comb begin
    for (int l = 0; l < NLANES; l++) begin
      logic [4:0] ts;
      ts              = (timesteps == 5'd0) ? 5'd0 : 5'(l % int'(timesteps));
      lane_ts[l*5 +: 5] = ts;
      lane_active[l]  = 5'(l) < nlanes;
      lane_reuse[l]   = reuse && lane_active[l] && ts != 5'd0;
      lane_we[l]      = in_we && in_lane == 5'(l);
    end
  end

  assign lane_waddr = in_addr;
  assign lane_a     = in_a;
  assign lane_b     = in_b;
  assign out_result = lane_results[out_lane*2048 +: 2048];

endmodule

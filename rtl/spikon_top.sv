// spikon_top -- the SpikON online-SNN-learning accelerator.
//
// Five parts: the top controller; the SIMD SNN core (element-wise work such as LIF
// updates, surrogate gradients, pooling and softmax arithmetic); the bi-temporal parallel
// engine, BTPE (vector-matrix products of the forward pass, error propagation and weight
// gradients, all timesteps in parallel, with computation reuse between timesteps); the
// 1 MB global SRAM; and the memory controller that arbitrates the global SRAM between the
// core, the BTPE and the external side. The off-chip HBM is not part of this RTL: its side
// of the memory controller is the ext_* port, through which a host or DMA engine fills and
// drains the global SRAM.
// Use: load the core program through imem_*, fill the global SRAM through ext_*, set
// btpe_job, n_steps, concurrent and beta, pulse start, wait for done. Partitioning follows
// the source design's block diagram; the interfaces are this design's own.
module spikon_top
  import spikon_pkg::*;
#(
  parameter int unsigned NLANES    = 24,
  parameter int unsigned BUF_DEPTH = 64,
  parameter int unsigned SR_DEPTH  = 4096,
  parameter int unsigned G_DEPTH   = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // run control
  input  logic                 start,
  input  logic [15:0]          n_steps,
  input  logic                 concurrent,
  input  btpe_job_t            btpe_job,
  input  logic [31:0]          beta,
  output logic                 busy,
  output logic                 done,
  output logic [15:0]          step,
  // program load of the SNN core
  input  logic                 imem_we,
  input  logic [9:0]           imem_waddr,
  input  logic [31:0]          imem_wdata,
  // external (HBM-side) access to the global SRAM
  input  mem_req_t             ext_req,
  output logic                 ext_gnt,
  output logic                 ext_rvalid,
  output logic [VEC_W-1:0]     ext_rdata,
  // status
  output logic [NLANES-1:0]    lane_busy,
  output logic [NLANES-1:0]    lane_reuse,
  output logic [2:0]           mem_conflicts,
  output logic [15:0]          core_hazard_stalls,
  output logic [15:0]          core_mem_stalls
);

  logic            btpe_start, btpe_done, btpe_busy, core_start, core_done, core_busy;
  mem_req_t        req [3];
  logic [2:0]      gnt, rvalid;
  logic [VEC_W-1:0] rdata, sram_wdata, sram_rdata;
  logic            sram_en, sram_we;
  logic [GADDR_W-1:0] sram_addr;
  logic [15:0]     core_retired;

  top_controller u_top_ctrl (
    .clk, .rst_n, .start, .n_steps, .concurrent, .btpe_start, .btpe_done, .core_start,
    .core_done, .step, .busy, .done);

  snn_core #(.NUNITS(64), .IDEPTH(1024)) u_core (
    .clk, .rst_n, .start(core_start), .beta, .imem_we, .imem_waddr, .imem_wdata,
    .mem_req(req[0]), .mem_gnt(gnt[0]), .mem_rvalid(rvalid[0]), .mem_rdata(rdata),
    .busy(core_busy), .done(core_done), .hazard_stalls(core_hazard_stalls),
    .mem_stalls(core_mem_stalls), .retired(core_retired));

  btpe #(.NLANES(NLANES), .BUF_DEPTH(BUF_DEPTH), .SR_DEPTH(SR_DEPTH)) u_btpe (
    .clk, .rst_n, .start(btpe_start), .job(btpe_job), .mem_req(req[1]), .mem_gnt(gnt[1]),
    .mem_rvalid(rvalid[1]), .mem_rdata(rdata), .lane_busy, .lane_reuse, .busy(btpe_busy),
    .done(btpe_done));

  assign req[2]     = ext_req;
  assign ext_gnt    = gnt[2];
  assign ext_rvalid = rvalid[2];
  assign ext_rdata  = rdata;

  memory_controller #(.NREQ(3)) u_memctrl (
    .clk, .rst_n, .req, .gnt, .rvalid, .rdata, .sram_en, .sram_we, .sram_addr, .sram_wdata,
    .sram_rdata, .conflicts(mem_conflicts));

  global_sram #(.WIDTH(VEC_W), .DEPTH(G_DEPTH)) u_gsram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr[$clog2(G_DEPTH)-1:0]),
    .wdata(sram_wdata), .rdata(sram_rdata));

endmodule

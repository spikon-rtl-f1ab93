// tb_btpe -- self-checking testbench of the bi-temporal parallel engine.
// A global-SRAM model in this testbench answers the engine's requests (random grant stalls,
// read data one clock after the grant). Jobs run with 6 lanes and T = 3, so lanes 0 and 3
// serve timestep 0; in reuse jobs lanes 1, 2, 4 and 5 add the result of the lane before them.
// Every written result word is compared with a reference computed here. Also checks that
// all active lanes run at the same time (parallel timesteps).
module tb_btpe;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  localparam int NL = 6;
  logic clk = 0, rst_n = 0, start = 0, mem_gnt, mem_rvalid = 0, busy, done;
  btpe_job_t job;
  mem_req_t mem_req;
  logic [2047:0] mem_rdata = 0;
  logic [NL-1:0] lane_busy, lane_reuse;
  logic [2047:0] gmem [4096];
  int checks = 0, failures = 0, max_parallel = 0;

  btpe #(.NLANES(NL), .BUF_DEPTH(16), .SR_DEPTH(64)) dut (
    .clk, .rst_n, .start, .job, .mem_req, .mem_gnt, .mem_rvalid, .mem_rdata, .lane_busy,
    .lane_reuse, .busy, .done);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_req.valid && mem_gnt) begin
      if (mem_req.we) gmem[mem_req.addr] <= mem_req.wdata;
      else begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= gmem[mem_req.addr];
      end
    end
    if ($countones(lane_busy) > max_parallel) max_parallel = $countones(lane_busy);
  end
  always_ff @(negedge clk) mem_gnt <= ($urandom_range(3, 0) != 0);

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic dense, input logic reuse, input int dv);
    logic [31:0] ref_v [NL][64];
    logic [31:0] t, bw;
    job = '0;
    job.a_base = 12'd256; job.b_base = 12'd16; job.out_base = 12'd1024;
    job.data_volume = DV_W'(dv); job.timesteps = 5'd3; job.nlanes = 5'(NL);
    job.dense = dense; job.reuse = reuse;
    for (int k = 0; k < dv; k++) begin
      gmem[16 + k] = '0;
      for (int p = 0; p < 16; p++) gmem[16 + k][p*32 +: 32] = rand_fp(3);
    end
    for (int l = 0; l < NL; l++)
      for (int k = 0; k < dv; k++)
        for (int p = 0; p < 64; p++) gmem[256 + l*dv + k][p*32 +: 32] = dense ? rand_fp(3) : 32'($urandom);
    for (int l = 0; l < NL; l++)
      for (int o = 0; o < 64; o++) begin
        ref_v[l][o] = FP_ZERO;
        for (int k = 0; k < dv; k++) begin
          logic [2047:0] aw;
          logic cur, prv;
          aw = gmem[256 + l*dv + k];
          bw = gmem[16 + k][((o / 16) * 4 + (o % 16) / 4) * 32 +: 32];
          cur = aw[o]; prv = aw[64 + o];
          if (dense) t = r2f(f2r(aw[o*32 +: 32]) * f2r(bw));
          else if (reuse && l % 3 != 0) t = (cur && !prv) ? bw : (!cur && prv) ? {~bw[31], bw[30:0]} : FP_ZERO;
          else t = cur ? bw : FP_ZERO;
          ref_v[l][o] = r2f(f2r(ref_v[l][o]) + f2r(t));
        end
        if (reuse && l % 3 != 0) ref_v[l][o] = r2f(f2r(ref_v[l][o]) + f2r(ref_v[l-1][o]));
      end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    max_parallel = 0;
    for (int c = 0; c < 20000 && !done; c++) @(negedge clk);
    checks += 2;
    if (!done) failures++;
    if (max_parallel != NL) begin failures++; $display("only %0d lanes ran at once", max_parallel); end
    for (int l = 0; l < NL; l++)
      for (int o = 0; o < 64; o++) begin
        checks++;
        if (ulp_diff(gmem[1024 + l][o*32 +: 32], ref_v[l][o]) > 1) begin
          failures++;
          if (failures < 10) $display("dense %0d reuse %0d lane %0d out %0d: %h expected %h",
                                      dense, reuse, l, o, gmem[1024 + l][o*32 +: 32], ref_v[l][o]);
        end
      end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0, 1'b0, 5);
    run(1'b0, 1'b1, 8);
    run(1'b1, 1'b0, 4);
    run(1'b1, 1'b1, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

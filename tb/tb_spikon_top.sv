// tb_spikon_top -- end-to-end testbench of the SpikON accelerator at its default size
// (24 lanes, 23 local SRAMs of 256 KB, 1 MB global SRAM, 64-unit SIMD core).
// Through the external port it loads B words, per-lane A words, membrane potentials and
// per-timestep thresholds into the global SRAM, and loads into the core a program that
// applies one LIF step (lif, fire, reset) to the BTPE outputs of lanes 0..3.
//   Run 1, sequential: sparse job with computation reuse, T = 6 (so lanes 0, 6, 12, 18 serve
//     timestep 0 and the other lanes add their neighbour's result), then the core program.
//   Run 2, concurrent, two steps: dense job without reuse while the core runs its program
//     again, so the memory controller must arbitrate between them.
// All 24 x 64 BTPE outputs of both runs, and the core's spikes and reset potentials, are
// read back and compared with references computed here. The mechanisms the design has
// (sparse mode, negative CTCR terms, reuse cascade, lane grouping, dense mode, concurrent
// start, arbitration conflicts, core hazard and memory stalls) are counted; one that never
// happened counts as a failure.
module tb_spikon_top;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  localparam int NL = 24, T = 6, DV = 8;
  localparam int B_BASE = 16, A_BASE = 256, OUT1 = 1024, OUT2 = 1100;
  localparam int V_BASE = 1200, TH_BASE = 1210, S_OUT = 1220, V_OUT = 1230;

  logic clk = 0, rst_n = 0, start = 0, concurrent = 0, busy, done;
  logic [15:0] n_steps = 1, step, core_hazard_stalls, core_mem_stalls;
  btpe_job_t btpe_job;
  logic [31:0] beta;
  logic imem_we = 0;
  logic [9:0] imem_waddr = 0;
  logic [31:0] imem_wdata = 0;
  mem_req_t ext_req;
  logic ext_gnt, ext_rvalid;
  logic [2047:0] ext_rdata;
  logic [NL-1:0] lane_busy, lane_reuse;
  logic [2:0] mem_conflicts;

  spikon_top dut (.clk, .rst_n, .start, .n_steps, .concurrent, .btpe_job, .beta, .busy, .done,
    .step, .imem_we, .imem_waddr, .imem_wdata, .ext_req, .ext_gnt, .ext_rvalid, .ext_rdata,
    .lane_busy, .lane_reuse, .mem_conflicts, .core_hazard_stalls, .core_mem_stalls);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ev_sparse = 0, ev_neg = 0, ev_reuse = 0, ev_group = 0, ev_dense = 0, ev_conc = 0;
  int ev_conflict = 0, ev_hazard = 0, ev_memstall = 0, max_busy = 0;

  logic [2047:0] img [4096];     // what the testbench wrote into the global SRAM

  always @(posedge clk) begin
    if ($countones(lane_busy) > max_busy) max_busy = $countones(lane_busy);
    if (mem_conflicts[0] && dut.u_btpe.busy) ev_conflict++;
    if (mem_conflicts[1] && dut.u_core.busy) ev_conflict++;
    if (dut.u_top_ctrl.btpe_start && dut.u_top_ctrl.core_start) ev_conc++;
  end

  initial begin
    #20000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ext_write(input int a, input logic [2047:0] d);
    ext_req = '{valid: 1'b1, we: 1'b1, addr: 12'(a), wdata: d};
    @(posedge clk);
    while (!ext_gnt) @(posedge clk);
    #1 ext_req = '0;
    img[a] = d;
  endtask

  task automatic ext_read(input int a, output logic [2047:0] d);
    ext_req = '{valid: 1'b1, we: 1'b0, addr: 12'(a), wdata: '0};
    @(posedge clk);
    while (!ext_gnt) @(posedge clk);
    #1 ext_req = '0;
    @(posedge clk);
    #1 d = ext_rdata;
  endtask

  function automatic logic [31:0] alu(input opcode_e op, input int rd, input int rs1, input int rs2);
    return {op, 5'(rd), 5'(rs1), 5'(rs2), 11'd0};
  endfunction
  function automatic logic [31:0] mem_i(input opcode_e op, input int r, input int addr);
    return {op, 5'(r), 9'd0, 12'(addr)};
  endfunction

  // reference BTPE outputs of a job whose operands are in img[]
  task automatic btpe_ref(input logic dense, input logic reuse, output logic [31:0] r [NL][64]);
    for (int l = 0; l < NL; l++)
      for (int o = 0; o < 64; o++) begin
        logic [31:0] t, bw;
        r[l][o] = FP_ZERO;
        for (int k = 0; k < DV; k++) begin
          logic [2047:0] aw;
          logic cur, prv;
          aw = img[A_BASE + l*DV + k];
          bw = img[B_BASE + k][((o / 16) * 4 + (o % 16) / 4) * 32 +: 32];
          cur = aw[o]; prv = aw[64 + o];
          if (dense) t = r2f(f2r(aw[o*32 +: 32]) * f2r(bw));
          else if (reuse && l % T != 0) begin
            t = (cur && !prv) ? bw : (!cur && prv) ? {~bw[31], bw[30:0]} : FP_ZERO;
            if (!cur && prv) ev_neg++;
          end else t = cur ? bw : FP_ZERO;
          r[l][o] = r2f(f2r(r[l][o]) + f2r(t));
        end
        if (reuse && l % T != 0) r[l][o] = r2f(f2r(r[l][o]) + f2r(r[l-1][o]));
      end
  endtask

  task automatic fill_operands(input logic dense);
    logic [2047:0] w;
    for (int k = 0; k < DV; k++) begin
      w = '0;
      for (int p = 0; p < 16; p++) w[p*32 +: 32] = rand_fp(3);
      ext_write(B_BASE + k, w);
    end
    for (int l = 0; l < NL; l++)
      for (int k = 0; k < DV; k++) begin
        for (int p = 0; p < 64; p++) w[p*32 +: 32] = dense ? rand_fp(3) : 32'($urandom);
        ext_write(A_BASE + l*DV + k, w);
      end
  endtask

  task automatic check_btpe(input int base, input logic [31:0] r [NL][64]);
    logic [2047:0] d;
    for (int l = 0; l < NL; l++) begin
      ext_read(base + l, d);
      for (int o = 0; o < 64; o++) begin
        checks++;
        if (ulp_diff(d[o*32 +: 32], r[l][o]) > 1) begin
          failures++;
          if (failures < 10) $display("lane %0d out %0d: %h expected %h", l, o, d[o*32 +: 32], r[l][o]);
        end
      end
    end
  endtask

  task automatic check_core(input logic [31:0] r [NL][64]);
    logic [2047:0] s, v;
    for (int l = 0; l < 4; l++) begin
      ext_read(S_OUT + l, s);
      ext_read(V_OUT + l, v);
      for (int o = 0; o < 64; o++) begin
        logic [31:0] u, th, es, ev;
        th = img[TH_BASE + l % T][o*32 +: 32];
        u  = r2f(f2r(r2f(f2r(beta) * f2r(img[V_BASE + l][o*32 +: 32]))) + f2r(r[l][o]));
        es = (f2r(u) >= f2r(th)) ? FP_ONE : FP_ZERO;
        ev = (f2r(u) >= f2r(th)) ? r2f(f2r(u) - f2r(th)) : u;
        checks += 2;
        if (s[o*32 +: 32] != es) failures++;
        if (ulp_diff(v[o*32 +: 32], ev) > 1) failures++;
      end
    end
  endtask

  task automatic run(input logic conc, input int steps);
    concurrent = conc; n_steps = 16'(steps);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    for (int c = 0; c < 200000 && !done; c++) @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("run did not finish"); end
    if (core_hazard_stalls != 0) ev_hazard++;
    if (core_mem_stalls != 0) ev_memstall++;
  endtask

  logic [31:0] ref1 [NL][64];
  logic [31:0] ref2 [NL][64];

  initial begin
    logic [31:0] prog [$];
    logic [2047:0] w;
    ext_req = '0;
    beta = r2f(0.09);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // core program: LIF step on the BTPE outputs of lanes 0..3 (timesteps 0..3)
    for (int l = 0; l < 4; l++) begin
      prog.push_back(mem_i(OP_LD, 0, OUT1 + l));
      prog.push_back(mem_i(OP_LD, 4, V_BASE + l));
      prog.push_back(mem_i(OP_LD, 8, TH_BASE + l));
      prog.push_back(alu(OP_LIF, 12, 4, 0));
      prog.push_back(alu(OP_FIRE, 16, 12, 8));
      prog.push_back(alu(OP_RESET, 20, 12, 8));
      prog.push_back(mem_i(OP_ST, 16, S_OUT + l));
      prog.push_back(mem_i(OP_ST, 20, V_OUT + l));
    end
    prog.push_back({OP_HALT, 26'd0});
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    for (int l = 0; l < T; l++) begin
      for (int p = 0; p < 64; p++) w[p*32 +: 32] = rand_fp(2);
      ext_write(V_BASE + l, w);
      for (int p = 0; p < 64; p++) w[p*32 +: 32] = {1'b0, rand_fp(1) & 32'h7fff_ffff};
      ext_write(TH_BASE + l, w);
    end

    // run 1: sparse, reuse, sequential
    fill_operands(1'b0);
    btpe_job = '0;
    btpe_job.a_base = 12'(A_BASE); btpe_job.b_base = 12'(B_BASE); btpe_job.out_base = 12'(OUT1);
    btpe_job.data_volume = DV_W'(DV); btpe_job.timesteps = 5'(T); btpe_job.nlanes = 5'(NL);
    btpe_job.dense = 1'b0; btpe_job.reuse = 1'b1;
    btpe_ref(1'b0, 1'b1, ref1);
    run(1'b0, 1);
    ev_sparse++;
    ev_reuse += $countones(lane_reuse);
    for (int l = T; l < NL; l++) if (l % T == 0 && !lane_reuse[l]) ev_group++;
    check_btpe(OUT1, ref1);
    check_core(ref1);

    // run 2: dense, no reuse, concurrent with the core program, two steps
    fill_operands(1'b1);
    btpe_job.out_base = 12'(OUT2); btpe_job.dense = 1'b1; btpe_job.reuse = 1'b0;
    btpe_ref(1'b1, 1'b0, ref2);
    run(1'b1, 2);
    ev_dense++;
    checks++;
    if (step != 16'd2) failures++;
    check_btpe(OUT2, ref2);
    check_core(ref1);

    checks++;
    if (max_busy != NL) begin failures++; $display("only %0d lanes busy at once", max_busy); end
    $display("mechanisms: sparse %0d, negative CTCR terms %0d, reuse lanes %0d, grouped lanes %0d, dense %0d, concurrent starts %0d, arbitration conflicts %0d, hazard-stall runs %0d, memory-stall runs %0d",
             ev_sparse, ev_neg, ev_reuse, ev_group, ev_dense, ev_conc, ev_conflict, ev_hazard, ev_memstall);
    checks += 9;
    if (ev_sparse == 0) failures++;
    if (ev_neg == 0) failures++;
    if (ev_reuse == 0) failures++;
    if (ev_group == 0) failures++;
    if (ev_dense == 0) failures++;
    if (ev_conc == 0) failures++;
    if (ev_conflict == 0) failures++;
    if (ev_hazard == 0) failures++;
    if (ev_memstall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

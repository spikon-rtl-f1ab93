// tb_btp_lane -- self-checking testbench of one BTP-dataflow lane.
// Fills buffers A and B with random operands, runs sparse, sparse-with-reuse and dense jobs,
// and compares all 64 results, and the four local-SRAM beats, with a reference computed
// here in double precision (rounded to FP32 after each step, as the PUs do). The previous
// lane's local SRAM is modelled by an array in this testbench. It also checks the job
// latency from driving start to seeing done: data_volume + 10 cycles without reuse, +1 with reuse when the
// previous lane is already done, and that done waits for a late prev_ready.
module tb_btp_lane;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0, start = 0, mode = 0, reuse_en = 0, prev_ready = 0;
  logic [DV_W-1:0] dv = 0;
  logic a_we = 0, b_we = 0;
  logic [5:0] a_waddr = 0, b_waddr = 0;
  logic [2047:0] a_wdata = 0, result;
  logic [511:0] b_wdata = 0, reuse_rdata, sr_wdata;
  logic reuse_re, sr_we, busy, done;
  logic [11:0] reuse_raddr, sr_waddr;
  logic [63:0] nonzero_ops;
  logic [511:0] prev_sr [4];
  logic [511:0] sr_seen [4];
  logic [2047:0] amem [DEPTH];
  logic [511:0] bmem [DEPTH];
  int checks = 0, failures = 0;

  btp_lane #(.BUF_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .start, .mode, .reuse_en, .data_volume(dv), .sr_base(12'h010),
    .a_we, .a_waddr, .a_wdata, .b_we, .b_waddr, .b_wdata, .prev_ready, .reuse_re,
    .reuse_raddr, .reuse_rdata, .sr_we, .sr_waddr, .sr_wdata, .result, .nonzero_ops,
    .busy, .done);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (reuse_re) reuse_rdata <= prev_sr[reuse_raddr[1:0]];
    if (sr_we) sr_seen[sr_waddr[1:0]] <= sr_wdata;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input logic m, input int n);
    for (int k = 0; k < n; k++) begin
      for (int p = 0; p < 64; p++) amem[k][p*32 +: 32] = m ? rand_fp(4) : 32'($urandom);
      for (int p = 0; p < 16; p++) bmem[k][p*32 +: 32] = rand_fp(4);
      @(negedge clk);
      a_we = 1; a_waddr = 6'(k); a_wdata = amem[k];
      b_we = 1; b_waddr = 6'(k); b_wdata = bmem[k];
    end
    @(negedge clk); a_we = 0; b_we = 0;
  endtask

  task automatic run(input logic m, input logic re, input int n, input int prev_delay);
    logic [31:0] ref_v [64];
    logic [31:0] term, bw;
    int cycles, expect_cycles;
    logic cur, prv;
    fill(m, n);
    for (int p = 0; p < 4; p++)
      for (int q = 0; q < 16; q++) prev_sr[p][q*32 +: 32] = rand_fp(4);
    for (int k = 0; k < 64; k++) begin
      ref_v[k] = FP_ZERO;
      for (int i = 0; i < n; i++) begin
        bw = bmem[i][((k / 16) * 4 + (k % 16) / 4) * 32 +: 32];
        if (m) term = r2f(f2r(amem[i][k*32 +: 32]) * f2r(bw));
        else begin
          cur = amem[i][k]; prv = amem[i][64 + k];
          if (re) term = (cur && !prv) ? bw : (!cur && prv) ? {~bw[31], bw[30:0]} : FP_ZERO;
          else    term = cur ? bw : FP_ZERO;
        end
        ref_v[k] = r2f(f2r(ref_v[k]) + f2r(term));
      end
      if (re) ref_v[k] = r2f(f2r(ref_v[k]) + f2r(prev_sr[k / 16][(k % 16) * 32 +: 32]));
    end
    mode = m; reuse_en = re; dv = DV_W'(n); prev_ready = (prev_delay == 0);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin
      if (cycles == prev_delay) prev_ready = 1;
      @(negedge clk);
      cycles++;
      if (cycles > 10000) break;
    end
    expect_cycles = n + 10 + (re ? 1 : 0);  // counted from the cycle that drives start
    if (re && prev_delay > n + 3) expect_cycles = prev_delay + 7;
    checks++;
    if (cycles != expect_cycles) begin
      failures++;
      $display("latency %0d expected %0d (mode %0d reuse %0d n %0d)", cycles, expect_cycles, m, re, n);
    end
    for (int k = 0; k < 64; k++) begin
      checks += 2;
      if (ulp_diff(result[k*32 +: 32], ref_v[k]) > 1) begin
        failures++;
        if (failures < 10) $display("mode %0d reuse %0d out %0d: %h expected %h", m, re, k, result[k*32 +: 32], ref_v[k]);
      end
      if (sr_seen[k / 16][(k % 16) * 32 +: 32] != result[k*32 +: 32]) failures++;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(1'b0, 1'b0, 9, 0);
    run(1'b0, 1'b1, 17, 0);
    run(1'b1, 1'b0, 23, 0);
    run(1'b0, 1'b1, 5, 40);
    run(1'b1, 1'b1, 64, 0);
    run(1'b0, 1'b0, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_snn_core -- self-checking testbench of the SIMD SNN core.
// Loads a straight-line program into the instruction SRAM that performs one LIF step for
// 64 neurons (lif, fire, reset), a surrogate gradient, a division, a square root and a
// maximum, plus the two cross-element reductions (sum and maximum of the 64 membrane
// potentials), and stores every result to a global-SRAM model kept in this testbench. The model
// grants randomly, so memory stalls occur; back-to-back dependent instructions cause hazard
// stalls. Every stored element is compared with a reference computed here in double
// precision, and both kinds of stall must have happened.
module tb_snn_core;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, imem_we = 0, mem_gnt, mem_rvalid = 0, busy, done;
  logic [9:0] imem_waddr = 0;
  logic [31:0] imem_wdata = 0, beta;
  mem_req_t mem_req;
  logic [2047:0] mem_rdata = 0;
  logic [15:0] hazard_stalls, mem_stalls, retired;
  logic [2047:0] gmem [4096];
  int checks = 0, failures = 0;

  snn_core dut (.clk, .rst_n, .start, .beta, .imem_we, .imem_waddr, .imem_wdata, .mem_req,
                .mem_gnt, .mem_rvalid, .mem_rdata, .busy, .done, .hazard_stalls, .mem_stalls,
                .retired);

  always #5 clk = ~clk;
  always_ff @(negedge clk) mem_gnt <= ($urandom_range(2, 0) != 0);
  always_ff @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_req.valid && mem_gnt) begin
      if (mem_req.we) gmem[mem_req.addr] <= mem_req.wdata;
      else begin mem_rvalid <= 1'b1; mem_rdata <= gmem[mem_req.addr]; end
    end
  end

  function automatic logic [31:0] alu(input opcode_e op, input int rd, input int rs1, input int rs2);
    return {op, 5'(rd), 5'(rs1), 5'(rs2), 11'd0};
  endfunction
  function automatic logic [31:0] mem_i(input opcode_e op, input int r, input int addr);
    return {op, 5'(r), 9'd0, 12'(addr)};
  endfunction

  logic [31:0] prog [$];

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real lvl [64];
  real umax;

  initial begin
    beta = r2f(0.09);
    prog = '{mem_i(OP_LD, 0, 10), mem_i(OP_LD, 4, 11), mem_i(OP_LD, 8, 12),
             alu(OP_LIF, 12, 0, 4), alu(OP_FIRE, 16, 12, 8), alu(OP_RESET, 20, 12, 8),
             alu(OP_SG, 24, 12, 8), alu(OP_DIV, 28, 4, 8),
             mem_i(OP_ST, 12, 20), mem_i(OP_ST, 16, 21), mem_i(OP_ST, 20, 22),
             mem_i(OP_ST, 24, 23), mem_i(OP_ST, 28, 24),
             alu(OP_SQRT, 0, 8, 0), alu(OP_MAX, 4, 12, 8),
             mem_i(OP_ST, 0, 25), mem_i(OP_ST, 4, 26), alu(OP_NOP, 0, 0, 0),
             alu(OP_MIN, 4, 4, 8), mem_i(OP_ST, 4, 27),
             alu(OP_RSUM, 8, 12, 0), mem_i(OP_ST, 8, 28), alu(OP_RMAX, 12, 12, 0),
             mem_i(OP_ST, 12, 29), {OP_HALT, 26'd0}};
    for (int k = 0; k < 64; k++) begin
      gmem[10][k*32 +: 32] = rand_fp(2);                 // v_{t-1}
      gmem[11][k*32 +: 32] = rand_fp(2);                 // W s_t
      gmem[12][k*32 +: 32] = {1'b0, rand_fp(1) & 32'h7fff_ffff}; // theta_t > 0
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;
    for (int run = 0; run < 2; run++) begin
      for (int a = 20; a < 30; a++) gmem[a] = '0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int c = 0; c < 2000 && !done; c++) @(negedge clk);
      checks += 2;
      if (!done) failures++;
      if (retired != 16'(prog.size())) begin failures++; $display("retired %0d", retired); end
      for (int k = 0; k < 64; k++)
        lvl[k] = f2r(r2f(f2r(r2f(f2r(beta) * f2r(gmem[10][k*32 +: 32]))) + f2r(gmem[11][k*32 +: 32])));
      umax = lvl[0];
      for (int k = 1; k < 64; k++) if (lvl[k] > umax) umax = lvl[k];
      for (int n = 32; n >= 1; n = n / 2)
        for (int j = 0; j < n; j++) lvl[j] = f2r(r2f(lvl[2*j] + lvl[2*j+1]));
      for (int k = 0; k < 64; k++) begin
        logic [31:0] v, x, th, u, e [10];
        real t;
        v = gmem[10][k*32 +: 32]; x = gmem[11][k*32 +: 32]; th = gmem[12][k*32 +: 32];
        u = r2f(f2r(r2f(f2r(beta) * f2r(v))) + f2r(x));
        e[0] = u;
        e[1] = (f2r(u) >= f2r(th)) ? FP_ONE : FP_ZERO;
        e[2] = (f2r(u) >= f2r(th)) ? r2f(f2r(u) - f2r(th)) : u;
        t = f2r(r2f(f2r(u) - f2r(th)));
        t = 1.0 - ((t < 0.0) ? -t : t);
        e[3] = (t < 0.0) ? FP_ZERO : r2f(t);
        e[4] = r2f(f2r(x) / f2r(th));
        e[5] = r2f($sqrt(f2r(th)));
        e[6] = (f2r(u) >= f2r(th)) ? u : th;
        e[7] = (f2r(e[6]) >= f2r(th)) ? th : e[6];
        e[8] = r2f(lvl[0]);
        e[9] = r2f(umax);
        for (int j = 0; j < 10; j++) begin
          checks++;
          if (ulp_diff(gmem[20 + j][k*32 +: 32], e[j]) > 1) begin
            failures++;
            if (failures < 10) $display("result %0d neuron %0d: %h expected %h", j, k, gmem[20 + j][k*32 +: 32], e[j]);
          end
        end
      end
      checks += 2;
      if (hazard_stalls == 0) begin failures++; $display("no hazard stall"); end
      if (mem_stalls == 0) begin failures++; $display("no memory stall"); end
      $display("run %0d: %0d hazard stalls, %0d memory stalls", run, hazard_stalls, mem_stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

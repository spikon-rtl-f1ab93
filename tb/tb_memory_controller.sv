// tb_memory_controller -- self-checking testbench of the global-SRAM arbiter.
// Three requesters issue random reads and writes and hold each request until granted; a
// global SRAM instance sits behind the controller. Checks: at most one grant per cycle, a
// grant only to a requester that asks, round-robin fairness (no requester waits more than
// two cycles), read data (one clock after the grant) against a model of the memory.
module tb_memory_controller;
  import spikon_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t req [3];
  logic [2:0] gnt, rvalid, conflicts;
  logic [2047:0] rdata, sram_wdata, sram_rdata;
  logic sram_en, sram_we;
  logic [11:0] sram_addr;
  logic [2047:0] model [64];
  logic [2047:0] expect_q [3];
  logic [2:0] pend = 0;
  int wait_c [3];
  int checks = 0, failures = 0, nconf = 0;

  memory_controller dut (.clk, .rst_n, .req, .gnt, .rvalid, .rdata, .sram_en, .sram_we,
    .sram_addr, .sram_wdata, .sram_rdata, .conflicts);
  global_sram #(.DEPTH(4096)) u_mem (.clk, .en(sram_en), .we(sram_we), .addr(sram_addr),
    .wdata(sram_wdata), .rdata(sram_rdata));

  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3; i++) begin req[i] = '0; wait_c[i] = 0; end
    for (int a = 0; a < 64; a++) model[a] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // clear the memory region used
    for (int a = 0; a < 64; a++) begin
      req[2] = '{valid: 1'b1, we: 1'b1, addr: 12'(a), wdata: '0};
      @(negedge clk);
      while (!gnt[2]) @(negedge clk);
    end
    req[2] = '0;
    @(negedge clk);
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // requests already pending stay; idle requesters may issue a new one
      for (int i = 0; i < 3; i++) if (!req[i].valid && $urandom_range(3, 0) != 0) begin
        req[i].valid = 1;
        req[i].we = 1'($urandom);
        req[i].addr = 12'($urandom_range(63, 0));
        req[i].wdata = {64{$urandom}};
      end
      #1;
      checks += 2;
      if (!$onehot0(gnt)) failures++;
      if ((gnt & {req[2].valid, req[1].valid, req[0].valid}) != gnt) failures++;
      nconf += $countones(conflicts);
      @(posedge clk);
      for (int i = 0; i < 3; i++) begin
        if (gnt[i]) begin
          if (req[i].we) model[req[i].addr[5:0]] = req[i].wdata;
          else begin expect_q[i] = model[req[i].addr[5:0]]; pend[i] = 1; end
          wait_c[i] = 0;
        end else if (req[i].valid) begin
          wait_c[i]++;
          checks++;
          if (wait_c[i] > 2) failures++;
        end
      end
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        if (pend[i]) begin
          checks += 2;
          if (!rvalid[i]) failures++;
          if (rdata != expect_q[i]) failures++;
          pend[i] = 0;
        end
        if (gnt[i]) ;  // grant already consumed at the edge
      end
      for (int i = 0; i < 3; i++) if (wait_c[i] == 0 && req[i].valid) req[i].valid = 0;
    end
    checks++;
    if (nconf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

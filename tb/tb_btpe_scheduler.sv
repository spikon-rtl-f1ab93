// tb_btpe_scheduler -- self-checking testbench of the BTPE local scheduler.
// Surrounds the FSM with a global-SRAM model (random grants, data one clock after grant)
// and stub lanes that finish a random time after their start pulse. Checks the address of
// every read (B words, then each lane's A words), the lane each A word is routed to, that
// lanes start together only after loading, that write-back waits for all lanes, and the
// write-back address and data of every lane.
module tb_btpe_scheduler;
  import spikon_pkg::*;

  localparam int NL = 8;
  logic clk = 0, rst_n = 0, start = 0, mem_gnt, mem_rvalid = 0, busy, done;
  btpe_job_t job, cur_job;
  mem_req_t mem_req;
  logic [2047:0] wb_data;
  logic lb_we, fill_we;
  logic [5:0] lb_addr;
  logic [4:0] fill_lane, wb_lane;
  logic [NL-1:0] lane_start, lane_done = 0, lane_active;
  int lane_timer [NL];
  int nreads = 0, nfills = 0, nlb = 0, nwb = 0, starts = 0;
  int checks = 0, failures = 0;
  logic [11:0] exp_addr [$];

  btpe_scheduler #(.NLANES(NL), .AW(6)) dut (
    .clk, .rst_n, .start, .job, .cur_job, .mem_req, .mem_gnt, .mem_rvalid, .wb_data,
    .lb_we, .lb_addr, .fill_we, .fill_lane, .lane_start, .lane_done, .lane_active, .wb_lane,
    .busy, .done);

  assign lane_active = NL'((1 << job.nlanes) - 1);
  assign wb_data = {64{27'd0, wb_lane}};

  always #5 clk = ~clk;
  always_ff @(negedge clk) mem_gnt <= ($urandom_range(2, 0) != 0);

  always @(posedge clk) if (rst_n) begin
    mem_rvalid <= mem_req.valid && mem_gnt && !mem_req.we;
    if (mem_req.valid && mem_gnt) begin
      if (mem_req.we) begin
        checks += 2;
        if (mem_req.addr != job.out_base + 12'(nwb)) failures++;
        if (mem_req.wdata[4:0] != 5'(nwb) || (lane_done & lane_active) != lane_active) failures++;
        nwb <= nwb + 1;
      end else begin
        checks++;
        if (exp_addr.size() == 0 || mem_req.addr != exp_addr[0]) begin
          failures++;
          $display("read %0d at %h", nreads, mem_req.addr);
        end
        if (exp_addr.size() != 0) void'(exp_addr.pop_front());
        nreads <= nreads + 1;
      end
    end
    if (lb_we) nlb <= nlb + 1;
    if (fill_we) begin
      checks++;
      if (int'(fill_lane) != nfills / int'(job.data_volume)) failures++;
      nfills <= nfills + 1;
    end
    for (int l = 0; l < NL; l++) begin
      if (lane_start[l]) begin
        checks++;
        if (nfills != int'(job.nlanes) * int'(job.data_volume)) begin failures++; $display("start after %0d fills", nfills); end
        lane_done[l] <= 1'b0;
        lane_timer[l] <= 3 + int'($urandom_range(30, 0));
      end else if (lane_timer[l] > 0) begin
        lane_timer[l] <= lane_timer[l] - 1;
        if (lane_timer[l] == 1) lane_done[l] <= 1'b1;
      end
    end
    if (lane_start != 0) starts <= starts + 1;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < NL; l++) lane_timer[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 5; j++) begin
      job = '0;
      job.a_base = 12'(100 + j); job.b_base = 12'(7 * j); job.out_base = 12'(3000 + j);
      job.data_volume = DV_W'(2 + 3 * j); job.nlanes = 5'(NL - j); job.timesteps = 5'd2;
      for (int k = 0; k < int'(job.data_volume); k++) exp_addr.push_back(job.b_base + 12'(k));
      for (int l = 0; l < int'(job.nlanes); l++)
        for (int k = 0; k < int'(job.data_volume); k++)
          exp_addr.push_back(job.a_base + 12'(l * int'(job.data_volume) + k));
      nfills = 0; nlb = 0; nwb = 0; starts = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int c = 0; c < 5000 && !done; c++) @(negedge clk);
      checks += 5;
      if (!done) failures++;
      if (nlb != int'(job.data_volume)) failures++;
      if (nwb != int'(job.nlanes)) failures++;
      if (starts != 1) failures++;
      if (exp_addr.size() != 0) failures++;
      exp_addr.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

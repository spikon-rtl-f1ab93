// tb_lane_controller -- self-checking testbench of the lane's local controller.
// A small model of the PU arrays (a counter of valid pairs) and of the aggregator (a
// one-clock delay) surrounds the controller. Checks: buffer addresses 0..dv-1 in order, one
// clear pulse per job, exactly dv valid pairs, the four drain beats in order, the wait for
// prev_ready under reuse, and done only after the last aggregator beat.
module tb_lane_controller;
  import spikon_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, reuse_en = 0, prev_ready = 0;
  logic [DV_W-1:0] dv = 0;
  logic [5:0] buf_raddr;
  logic pu_clear, pu_valid, oa_in_valid, reuse_re, busy, done;
  logic [1:0] oa_in_idx;
  logic [11:0] reuse_raddr;
  logic oa_out_valid = 0;
  logic [1:0] oa_out_idx = 0;
  int cnt = 0, clears = 0, beats = 0, next_addr = 0, reuse_reads = 0;
  int checks = 0, failures = 0;

  lane_controller #(.AW(6)) dut (
    .clk, .rst_n, .start, .data_volume(dv), .reuse_en, .sr_base(12'h100), .pu_done(cnt >= int'(dv)),
    .prev_ready, .oa_out_valid, .oa_out_idx, .buf_raddr, .pu_clear, .pu_valid, .oa_in_valid,
    .oa_in_idx, .reuse_re, .reuse_raddr, .busy, .done);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    oa_out_valid <= oa_in_valid;
    oa_out_idx   <= oa_in_idx;
    if (pu_clear) begin cnt <= 0; clears <= clears + 1; end
    else if (pu_valid) cnt <= cnt + 1;
    if (oa_in_valid) begin
      if (int'(oa_in_idx) != beats % 4) failures++;
      beats <= beats + 1;
    end
    if (reuse_re) begin
      if (reuse_raddr != 12'h100 + 12'(reuse_reads % 4)) failures++;
      reuse_reads <= reuse_reads + 1;
    end
  end

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 8; job++) begin
      int c0, b0, r0;
      dv = DV_W'(3 + job * 5);
      reuse_en = job[0];
      prev_ready = 0;
      c0 = clears; b0 = beats; r0 = reuse_reads;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int t = 0; t < 200 && !done; t++) begin
        if (t == int'(dv) + 20) prev_ready = 1;
        checks++;
        if (reuse_en && !prev_ready && beats != b0) failures++;   // no drain before prev_ready
        @(negedge clk);
      end
      checks += 4;
      if (!done) failures++;
      if (cnt != int'(dv)) begin failures++; $display("job %0d: %0d pairs, expected %0d", job, cnt, dv); end
      if (clears != c0 + 1) failures++;
      if (beats != b0 + 4) failures++;
      checks++;
      if (reuse_reads != r0 + (reuse_en ? 4 : 0)) failures++;
      checks++;
      if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // buffer read addresses must run 0, 1, 2, ... while pairs are being issued
  always @(posedge clk) begin
    if (pu_clear) next_addr = 0;
    else if (dut.state == dut.S_RUN) begin
      if (int'(buf_raddr) != next_addr) failures++;
      next_addr++;
    end
  end
endmodule

// tb_data_rearranger -- self-checking testbench of the BTPE data rearranger: lane-to-timestep
// map (lane l serves l mod T; for T = 6 lanes 0, 6, 12, 18 serve timestep 0), reuse enables,
// one-hot lane write enables and result selection.
module tb_data_rearranger;
  logic [4:0] timesteps, nlanes, in_lane, out_lane;
  logic reuse, in_we;
  logic [5:0] in_addr = 6'd5, lane_waddr;
  logic [2047:0] in_a = '1, lane_a, out_result;
  logic [511:0] in_b = '0, lane_b;
  logic [23:0] lane_we, lane_active, lane_reuse;
  logic [24*2048-1:0] lane_results;
  logic [24*5-1:0] lane_ts;
  int checks = 0, failures = 0;

  data_rearranger dut (.timesteps, .nlanes, .reuse, .in_we, .in_lane, .in_addr, .in_a, .in_b,
    .lane_we, .lane_waddr, .lane_a, .lane_b, .lane_results, .out_lane, .out_result, .lane_ts,
    .lane_active, .lane_reuse);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < 24; l++) lane_results[l*2048 +: 2048] = {64{32'(l * 77 + 3)}};
    for (int t = 1; t <= 24; t++) begin
      timesteps = 5'(t); nlanes = 5'(24 - t % 5); reuse = t[0];
      for (int s = 0; s < 24; s++) begin
        in_lane = 5'(s); out_lane = 5'(23 - s); in_we = 1;
        #1;
        checks += 3;
        if (lane_we != (24'd1 << s)) failures++;
        if (out_result != lane_results[(23 - s)*2048 +: 2048]) failures++;
        if (lane_waddr != in_addr || lane_a != in_a || lane_b != in_b) failures++;
      end
      for (int l = 0; l < 24; l++) begin
        checks += 3;
        if (lane_ts[l*5 +: 5] != 5'(l % t)) failures++;
        if (lane_active[l] != (l < int'(nlanes))) failures++;
        if (lane_reuse[l] != (reuse && l < int'(nlanes) && l % t != 0)) failures++;
      end
    end
    // the published example: T = 6, lanes 0, 6, 12 and 18 process timestep 0
    timesteps = 5'd6; #1;
    checks++;
    for (int l = 0; l < 24; l++)
      if ((lane_ts[l*5 +: 5] == 5'd0) != (l == 0 || l == 6 || l == 12 || l == 18)) failures++;
    in_we = 0; #1;
    checks++;
    if (lane_we != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_top_controller -- self-checking testbench of the top controller.
// Stub BTPE and core finish a random time after their start pulse. Checks, in sequential
// mode, that the core starts only after the BTPE is done; in concurrent mode, that both
// start in the same cycle; that each unit is started exactly n_steps times; and that done
// follows the last step.
module tb_top_controller;
  logic clk = 0, rst_n = 0, start = 0, concurrent = 0, btpe_start, core_start, busy, done;
  logic btpe_done = 0, core_done = 0;
  logic [15:0] n_steps = 0, step;
  int bt = 0, ct = 0, nb = 0, nc = 0, checks = 0, failures = 0;

  top_controller dut (.clk, .rst_n, .start, .n_steps, .concurrent, .btpe_start, .btpe_done,
                      .core_start, .core_done, .step, .busy, .done);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (btpe_start) begin
      btpe_done <= 0; bt <= 2 + int'($urandom_range(20, 0)); nb <= nb + 1;
      checks++;
      if (!concurrent && core_start) failures++;
      if (concurrent && !core_start) failures++;
    end else if (bt > 0) begin
      bt <= bt - 1;
      if (bt == 1) btpe_done <= 1;
    end
    if (core_start) begin
      core_done <= 0; ct <= 2 + int'($urandom_range(20, 0)); nc <= nc + 1;
      checks++;
      if (!concurrent && (!btpe_done || bt != 0)) failures++;
    end else if (ct > 0) begin
      ct <= ct - 1;
      if (ct == 1) core_done <= 1;
    end
  end

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 6; r++) begin
      n_steps = 16'(1 + r * 2); concurrent = r[0];
      nb = 0; nc = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int c = 0; c < 5000 && !done; c++) @(negedge clk);
      checks += 4;
      if (!done) failures++;
      if (nb != int'(n_steps) || nc != int'(n_steps)) begin failures++; $display("%0d/%0d starts", nb, nc); end
      if (!btpe_done || !core_done) failures++;
      if (step != n_steps) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

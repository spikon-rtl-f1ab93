// tb_local_sram -- self-checking testbench of the 256 KB lane-local SRAM: random writes and
// reads across the whole address range, with read-enable gating checked.
module tb_local_sram;
  logic clk = 0, we = 0, re = 0;
  logic [11:0] waddr = 0, raddr = 0;
  logic [511:0] wdata = 0, rdata, last;
  logic [511:0] model [logic [11:0]];
  int checks = 0, failures = 0;

  local_sram dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      we = 1; waddr = 12'($urandom);
      for (int w = 0; w < 16; w++) wdata[w*32 +: 32] = $urandom;
      model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[a]) begin
      re = 1; raddr = a;
      @(negedge clk);
      checks++;
      if (rdata != model[a]) failures++;
      last = rdata;
      re = 0; raddr = raddr + 1;
      @(negedge clk);
      checks++;
      if (rdata != last) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

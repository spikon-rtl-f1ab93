// tb_lane_buffer -- self-checking testbench of the lane input buffer (A configuration,
// 2048-bit words): writes random words, reads them back in random order, checks the
// one-clock read latency.
module tb_lane_buffer;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [2047:0] wdata = 0, rdata;
  logic [2047:0] model [64];
  int checks = 0, failures = 0;

  lane_buffer #(.WIDTH(2048), .DEPTH(64)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i);
      for (int w = 0; w < 64; w++) wdata[w*32 +: 32] = $urandom;
      model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      raddr = 6'($urandom_range(63, 0));
      @(negedge clk);
      checks++;
      if (rdata != model[raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

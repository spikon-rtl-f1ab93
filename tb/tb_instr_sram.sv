// tb_instr_sram -- self-checking testbench of the 1024 x 32-bit instruction SRAM: fills all
// words, reads them back at random with the one-clock read latency.
module tb_instr_sram;
  logic clk = 0, we = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] model [1024];
  int checks = 0, failures = 0;

  instr_sram dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; waddr = 10'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 2000; i++) begin
      raddr = 10'($urandom);
      @(negedge clk);
      checks++;
      if (rdata != model[raddr]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

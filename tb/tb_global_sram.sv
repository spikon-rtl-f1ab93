// tb_global_sram -- self-checking testbench of the 1 MB global SRAM: random writes and reads
// over the whole address range, registered read data, and read data held while disabled.
module tb_global_sram;
  logic clk = 0, en = 0, we = 0;
  logic [11:0] addr = 0;
  logic [2047:0] wdata = 0, rdata, last;
  logic [2047:0] model [logic [11:0]];
  int checks = 0, failures = 0;

  global_sram dut (.clk, .en, .we, .addr, .wdata, .rdata);

  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 12'($urandom);
      for (int w = 0; w < 64; w++) wdata[w*32 +: 32] = $urandom;
      model[addr] = wdata;
    end
    foreach (model[a]) begin
      @(negedge clk); en = 1; we = 0; addr = a;
      @(negedge clk);
      checks++;
      if (rdata != model[a]) failures++;
      last = rdata; en = 0; addr = a + 1;
      @(negedge clk);
      checks++;
      if (rdata != last) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_btpe_local_buffer -- self-checking testbench of the BTPE local buffer: random writes,
// then same-cycle reads of every word.
module tb_btpe_local_buffer;
  logic clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [511:0] wdata = 0, rdata;
  logic [511:0] model [64];
  int checks = 0, failures = 0;

  btpe_local_buffer dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        we = 1; waddr = 6'(i);
        for (int w = 0; w < 16; w++) wdata[w*32 +: 32] = $urandom;
        model[i] = wdata;
      end
      @(negedge clk); we = 0;
      for (int i = 0; i < 64; i++) begin
        raddr = 6'(63 - i);
        #1;
        checks++;
        if (rdata != model[63 - i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

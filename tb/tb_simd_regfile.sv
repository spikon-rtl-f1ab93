// tb_simd_regfile -- self-checking testbench of the 32 x 512-bit register file, accessed as
// 2048-bit groups of four registers: reset to zero, random group writes, two read ports,
// index bits [1:0] ignored.
module tb_simd_regfile;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] ra1 = 0, ra2 = 0, wa = 0;
  logic [2047:0] rd1, rd2, wd = 0;
  logic [2047:0] model [8];
  int checks = 0, failures = 0;

  simd_regfile dut (.clk, .rst_n, .ra1, .ra2, .rd1, .rd2, .we, .wa, .wd);

  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 8; g++) begin
      model[g] = '0;
      ra1 = 5'(g * 4); #1;
      checks++;
      if (rd1 != '0) failures++;
    end
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      we = $urandom_range(1, 0); wa = 5'($urandom);
      for (int w = 0; w < 64; w++) wd[w*32 +: 32] = $urandom;
      if (we) model[wa[4:2]] = wd;
      @(negedge clk); we = 0;
      ra1 = 5'($urandom); ra2 = 5'($urandom); #1;
      checks += 2;
      if (rd1 != model[ra1[4:2]]) failures++;
      if (rd2 != model[ra2[4:2]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

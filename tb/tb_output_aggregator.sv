// tb_output_aggregator -- self-checking testbench of the output aggregator.
// Random beats with and without reuse; checks the registered output one clock later against
// FP32 sums built here, and the index and valid pipeline.
module tb_output_aggregator;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, reuse_en = 0, out_valid;
  logic [1:0] in_idx = 0, out_idx;
  logic [511:0] psum_beat = 0, reuse_in = 0, out_beat, exp_beat;
  int checks = 0, failures = 0;

  output_aggregator dut (.clk, .rst_n, .in_valid, .in_idx, .reuse_en, .psum_beat, .reuse_in,
                         .out_valid, .out_idx, .out_beat);

  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      for (int k = 0; k < 16; k++) begin
        psum_beat[k*32 +: 32] = rand_fp(6);
        reuse_in[k*32 +: 32] = rand_fp(6);
      end
      reuse_en = i[0];
      in_valid = 1; in_idx = 2'(i);
      for (int k = 0; k < 16; k++)
        exp_beat[k*32 +: 32] = reuse_en ? r2f(f2r(psum_beat[k*32 +: 32]) + f2r(reuse_in[k*32 +: 32]))
                                        : psum_beat[k*32 +: 32];
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_idx != 2'(i)) failures++;
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (ulp_diff(out_beat[k*32 +: 32], exp_beat[k*32 +: 32]) > 1) failures++;
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

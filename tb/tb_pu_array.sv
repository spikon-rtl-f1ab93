// tb_pu_array -- self-checking testbench of a 4x4 PU array in dense mode.
// Each PU gets its own A operand and each row shares its B operand; the 16 sums are
// compared with a reference built here, and the array's done is checked to rise only after
// the last pair.
module tb_pu_array;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, mode = 1, valid = 0, done;
  logic [DV_W-1:0] dv = 12;
  logic [511:0] a_vec = 0, psum;
  logic [127:0] b_row = 0;
  logic [31:0] ref_v [16];
  int checks = 0, failures = 0;

  pu_array dut (.clk, .rst_n, .clear, .mode, .valid, .data_volume(dv), .a_vec, .b_row, .psum, .done);

  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int job = 0; job < 4; job++) begin
      mode = job[0];
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int k = 0; k < 16; k++) ref_v[k] = FP_ZERO;
      for (int i = 0; i < 12; i++) begin
        for (int k = 0; k < 16; k++) a_vec[k*32 +: 32] = mode ? rand_fp(4) : 32'($urandom_range(3, 0));
        for (int r = 0; r < 4; r++) b_row[r*32 +: 32] = rand_fp(4);
        for (int k = 0; k < 16; k++) begin
          logic [31:0] bw, t;
          bw = b_row[(k / 4) * 32 +: 32];
          if (mode) t = r2f(f2r(a_vec[k*32 +: 32]) * f2r(bw));
          else t = (a_vec[k*32 +: 2] == 2'b01) ? bw : (a_vec[k*32 +: 2] == 2'b10) ? {~bw[31], bw[30:0]} : FP_ZERO;
          ref_v[k] = r2f(f2r(ref_v[k]) + f2r(t));
        end
        checks++;
        if (done) failures++;
        valid = 1;
        @(negedge clk);
        valid = 0;
      end
      checks++;
      if (!done) failures++;
      for (int k = 0; k < 16; k++) begin
        checks++;
        if (ulp_diff(psum[k*32 +: 32], ref_v[k]) > 1) begin
          failures++;
          $display("job %0d PU %0d: %h expected %h", job, k, psum[k*32 +: 32], ref_v[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

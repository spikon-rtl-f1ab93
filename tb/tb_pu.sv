// tb_pu -- self-checking testbench of the processing unit.
// Runs sparse jobs (ternary codes, including -b terms) and dense jobs (FP32 products) with
// random operands. The expected partial sum is rebuilt step by step in double precision and
// rounded to FP32 after every addition, as the PU does. It also checks that 'done' stays low
// until exactly data_volume pairs have been accepted and is high afterwards.
module tb_pu;
  import spikon_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, mode = 0, valid = 0, done;
  logic [31:0] a = 0, b = 0, psum;
  logic [DV_W-1:0] dv = 0, count;
  int checks = 0, failures = 0;

  pu dut (.clk, .rst_n, .clear, .mode, .valid, .a, .b, .data_volume(dv), .psum, .count, .done);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_job(input logic m, input int n);
    logic [31:0] ref_ps, term;
    ref_ps = FP_ZERO;
    @(negedge clk); clear = 1; mode = m; dv = DV_W'(n);
    @(negedge clk); clear = 0;
    for (int k = 0; k < n; k++) begin
      valid = 1;
      b = rand_fp(6);
      if (m) begin
        a = rand_fp(6);
        term = r2f(f2r(a) * f2r(b));
      end else begin
        a = 32'($urandom_range(3, 0));
        term = (a[1:0] == 2'b01) ? b : (a[1:0] == 2'b10) ? {~b[31], b[30:0]} : FP_ZERO;
      end
      ref_ps = r2f(f2r(ref_ps) + f2r(term));
      checks++;
      if (done) begin failures++; $display("done early at pair %0d", k); end
      // an idle cycle in between must change nothing
      if (k % 5 == 2) begin
        @(negedge clk); valid = 0; a = 32'h1; b = FP_ONE;
      end
      @(negedge clk);
    end
    valid = 0;
    #1;
    checks++;
    if (!done) begin failures++; $display("done missing after %0d pairs", n); end
    checks++;
    if (ulp_diff(psum, ref_ps) > 1) begin
      failures++;
      $display("mode %0d n %0d: psum %h expected %h", m, n, psum, ref_ps);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < 20; j++) run_job(1'b0, 1 + j * 3);
    for (int j = 0; j < 20; j++) run_job(1'b1, 1 + j * 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

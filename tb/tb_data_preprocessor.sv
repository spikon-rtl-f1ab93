// tb_data_preprocessor -- self-checking testbench of the lane's data pre-processor.
// Random words in dense mode (pass-through), sparse mode (spike codes) and sparse mode with
// reuse (spike difference s_t - s_{t-1} as +1 / -1 / 0 codes).
module tb_data_preprocessor;
  logic [2047:0] a_word, a_pu;
  logic mode, reuse_en;
  logic [63:0] nonzero;
  int checks = 0, failures = 0;

  data_preprocessor dut (.a_word, .mode, .reuse_en, .a_pu, .nonzero);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 300; i++) begin
      for (int w = 0; w < 64; w++) a_word[w*32 +: 32] = $urandom;
      mode = i % 3 == 0;
      reuse_en = i % 2 == 0;
      #1;
      for (int k = 0; k < 64; k++) begin
        logic [31:0] e;
        logic c, p;
        c = a_word[k]; p = a_word[64 + k];
        if (mode) e = a_word[k*32 +: 32];
        else if (reuse_en) e = (c == p) ? 32'd0 : c ? 32'd1 : 32'd2;
        else e = {31'd0, c};
        checks++;
        if (a_pu[k*32 +: 32] != e) begin
          failures++;
          if (failures < 10) $display("mode %0d reuse %0d k %0d: %h expected %h", mode, reuse_en, k, a_pu[k*32 +: 32], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

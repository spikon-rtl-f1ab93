// tb_simd_controller -- self-checking testbench of the SNN core's stall logic: random
// pipeline contents, checked against read-after-write and memory-wait rules written
// independently here.
module tb_simd_controller;
  import spikon_pkg::*;
  logic id_valid, ex_valid, ma_valid, wb_valid, mem_gnt, hazard_stall, mem_stall;
  dec_instr_t id_dec, ex_dec, ma_dec, wb_dec;
  int checks = 0, failures = 0, hz = 0;

  simd_controller dut (.id_valid, .id_dec, .ex_valid, .ex_dec, .ma_valid, .ma_dec, .wb_valid,
                       .wb_dec, .mem_gnt, .hazard_stall, .mem_stall);

  function automatic dec_instr_t rnd();
    dec_instr_t d;
    d = '0;
    d.rd = 5'($urandom); d.rs1 = 5'($urandom); d.rs2 = 5'($urandom);
    d.uses_rs1 = 1'($urandom); d.uses_rs2 = 1'($urandom); d.writes_rd = 1'($urandom);
    d.is_load = 1'($urandom); d.is_store = !d.is_load && 1'($urandom);
    return d;
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      logic e_h, e_m;
      id_valid = 1'($urandom); ex_valid = 1'($urandom); ma_valid = 1'($urandom);
      wb_valid = 1'($urandom); mem_gnt = 1'($urandom);
      id_dec = rnd(); ex_dec = rnd(); ma_dec = rnd(); wb_dec = rnd();
      #1;
      e_h = 0;
      if (id_valid) begin
        if (ex_valid && ex_dec.writes_rd && id_dec.uses_rs1 && ex_dec.rd[4:2] == id_dec.rs1[4:2]) e_h = 1;
        if (ma_valid && ma_dec.writes_rd && id_dec.uses_rs1 && ma_dec.rd[4:2] == id_dec.rs1[4:2]) e_h = 1;
        if (wb_valid && wb_dec.writes_rd && id_dec.uses_rs1 && wb_dec.rd[4:2] == id_dec.rs1[4:2]) e_h = 1;
        if (ex_valid && ex_dec.writes_rd && id_dec.uses_rs2 && ex_dec.rd[4:2] == id_dec.rs2[4:2]) e_h = 1;
        if (ma_valid && ma_dec.writes_rd && id_dec.uses_rs2 && ma_dec.rd[4:2] == id_dec.rs2[4:2]) e_h = 1;
        if (wb_valid && wb_dec.writes_rd && id_dec.uses_rs2 && wb_dec.rd[4:2] == id_dec.rs2[4:2]) e_h = 1;
      end
      e_m = ma_valid && (ma_dec.is_load || ma_dec.is_store) && !mem_gnt;
      hz += int'(e_h);
      checks += 2;
      if (hazard_stall != e_h) failures++;
      if (mem_stall != e_m) failures++;
    end
    checks++;
    if (hz == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

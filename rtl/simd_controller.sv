// simd_controller -- pipeline-stall control of the SNN core.
//
// Two reasons stop the pipeline:
//   hazard  the instruction in decode reads a register group that an older instruction
//           still in execute, access or write-back will write (read-after-write). Fetch and
//           decode hold; a bubble enters execute. There is no forwarding, so a dependent
//           instruction waits until its producer has been written back.
//   mem     the access stage has a load or store that the memory controller has not
//           granted. Fetch, decode, execute and access hold; a bubble enters write-back.
// Stall management and dependency resolution are the controller's published tasks; the
// policy (interlock without forwarding) is this design's choice. Purely combinational.
module simd_controller
  import spikon_pkg::*;
(
  input  logic       id_valid,
  input  dec_instr_t id_dec,
  input  logic       ex_valid,
  input  dec_instr_t ex_dec,
  input  logic       ma_valid,
  input  dec_instr_t ma_dec,
  input  logic       wb_valid,
  input  dec_instr_t wb_dec,
  input  logic       mem_gnt,
  output logic       hazard_stall,
  output logic       mem_stall
);

  function automatic logic writes_group(input logic v, input dec_instr_t d, input logic [4:0] r);
    return v && d.writes_rd && (d.rd[4:2] == r[4:2]);
  endfunction

  logic raw1, raw2;

  assign raw1 = id_dec.uses_rs1 && (writes_group(ex_valid, ex_dec, id_dec.rs1) ||
                                    writes_group(ma_valid, ma_dec, id_dec.rs1) ||
                                    writes_group(wb_valid, wb_dec, id_dec.rs1));
  assign raw2 = id_dec.uses_rs2 && (writes_group(ex_valid, ex_dec, id_dec.rs2) ||
                                    writes_group(ma_valid, ma_dec, id_dec.rs2) ||
                                    writes_group(wb_valid, wb_dec, id_dec.rs2));

  assign mem_stall    = ma_valid && (ma_dec.is_load || ma_dec.is_store) && !mem_gnt;
  assign hazard_stall = id_valid && (raw1 || raw2);

endmodule

// snn_core -- the customized SIMD-based SNN core.
//
// Runs the element-wise and vector-wise parts of online SNN training (LIF charging, firing
// and resetting, surrogate gradients, pooling and softmax arithmetic) on 64-element FP32
// vectors, with a five-stage in-order pipeline:
//   IF  PC register and fetcher read the 1024 x 32-bit instruction SRAM;
//   ID  decoder and register-file read (a vector = four consecutive 512-bit registers);
//   EX  executor, 64 FP32 units and a reduction tree (rsum, rmax across the 64 elements);
//   MA  accessor, loads and stores one 2048-bit word of the global SRAM through the memory
//       controller;
//   WB  writer, writes the result or the loaded word into the register file.
// The SIMD controller stalls on read-after-write hazards and on ungranted memory accesses.
// 'start' resets the PC to 0 and runs until a 'halt' instruction has passed write-back;
// 'done' then stays high until the next start. The leak constant beta of the lif
// instruction is an input. A load's data must arrive with mem_rvalid in the cycle after the
// grant. The stage list, sizes and instruction kinds follow the source design; the
// encoding, the stall policy and the halt instruction are this design's choices. Branches are
// not provided, so programs are straight-line code.
module snn_core
  import spikon_pkg::*;
#(
  parameter int unsigned NUNITS = 64,
  parameter int unsigned IDEPTH = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       beta,
  // program load
  input  logic              imem_we,
  input  logic [$clog2(IDEPTH)-1:0] imem_waddr,
  input  logic [31:0]       imem_wdata,
  // global SRAM port (through the memory controller)
  output mem_req_t          mem_req,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [NUNITS*32-1:0] mem_rdata,
  // status
  output logic              busy,
  output logic              done,
  output logic [15:0]       hazard_stalls,
  output logic [15:0]       mem_stalls,
  output logic [15:0]       retired
);

  localparam int unsigned PW = $clog2(IDEPTH);
  localparam int unsigned VW = NUNITS * 32;

  logic          running;
  logic [PW-1:0] pc, id_pc;
  logic [31:0]   instr;
  logic          hazard_stall, mem_stall;

  // pipeline registers
  logic          id_valid, ex_valid, ma_valid, wb_valid;
  dec_instr_t    id_dec, ex_dec, ma_dec, wb_dec;
  logic [VW-1:0] ex_a, ex_b, ma_res, ma_st, wb_res;
  logic [VW-1:0] rd1, rd2, ex_res;

  // IF: PC register and fetcher. While decode is held the fetch re-reads the held address.
  instr_sram #(.DEPTH(IDEPTH), .WIDTH(32)) u_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata),
    .raddr((hazard_stall || mem_stall) ? id_pc : pc), .rdata(instr));

  // ID: decoder and register file
  simd_decoder u_dec (.instr, .dec(id_dec));

  simd_regfile #(.NREGS(32), .WIDTH(VW / 4)) u_rf (
    .clk, .rst_n, .ra1(id_dec.rs1), .ra2(id_dec.rs2), .rd1, .rd2,
    .we(wb_valid && wb_dec.writes_rd), .wa(wb_dec.rd),
    .wd(wb_dec.is_load ? mem_rdata : wb_res));

  simd_controller u_ctrl (
    .id_valid, .id_dec, .ex_valid, .ex_dec, .ma_valid, .ma_dec, .wb_valid, .wb_dec, .mem_gnt,
    .hazard_stall, .mem_stall);

  // EX: executor
  simd_executor #(.NUNITS(NUNITS)) u_exe (.op(ex_dec.fu_op), .beta, .va(ex_a), .vb(ex_b), .vr(ex_res));

  // MA: accessor
  always_comb begin
    mem_req       = '0;
    mem_req.valid = ma_valid && (ma_dec.is_load || ma_dec.is_store);
    mem_req.we    = ma_dec.is_store;
    mem_req.addr  = ma_dec.addr;
    mem_req.wdata = ma_st;
  end

  // the memory controller returns load data in the cycle after the grant
  a_load_data: assert property (@(posedge clk) disable iff (!rst_n)
                                (wb_valid && wb_dec.is_load) |-> mem_rvalid);

  assign busy = running || id_valid || ex_valid || ma_valid || wb_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running       <= 1'b0;
      pc            <= '0;
      id_pc         <= '0;
      id_valid      <= 1'b0;
      ex_valid      <= 1'b0;
      ma_valid      <= 1'b0;
      wb_valid      <= 1'b0;
      ex_dec        <= '0;
      ma_dec        <= '0;
      wb_dec        <= '0;
      ex_a          <= '0;
      ex_b          <= '0;
      ma_res        <= '0;
      ma_st         <= '0;
      wb_res        <= '0;
      done          <= 1'b0;
      hazard_stalls <= '0;
      mem_stalls    <= '0;
      retired       <= '0;
    end else if (start && !busy) begin
      running       <= 1'b1;
      pc            <= '0;
      done          <= 1'b0;
      hazard_stalls <= '0;
      mem_stalls    <= '0;
      retired       <= '0;
    end else begin
      // WB: writer (register write happens in the register file)
      if (wb_valid) begin
        retired <= retired + 1'b1;
        if (wb_dec.is_halt) done <= 1'b1;
      end
      if (mem_stall) begin
        mem_stalls <= mem_stalls + 1'b1;
        wb_valid   <= 1'b0;
      end else begin
        // MA -> WB
        wb_valid <= ma_valid;
        wb_dec   <= ma_dec;
        wb_res   <= ma_res;
        // EX -> MA
        ma_valid <= ex_valid;
        ma_dec   <= ex_dec;
        ma_res   <= ex_res;
        ma_st    <= ex_b;
        if (hazard_stall) begin
          hazard_stalls <= hazard_stalls + 1'b1;
          ex_valid      <= 1'b0;
        end else begin
          // ID -> EX
          ex_valid <= id_valid;
          ex_dec   <= id_dec;
          ex_a     <= rd1;
          ex_b     <= rd2;
          // IF -> ID
          id_valid <= running && !(id_valid && id_dec.is_halt);
          id_pc    <= pc;
          if (running && !(id_valid && id_dec.is_halt)) pc <= pc + 1'b1;
          if (id_valid && id_dec.is_halt) begin
            running  <= 1'b0;
            id_valid <= 1'b0;
          end
        end
      end
    end
  end

endmodule

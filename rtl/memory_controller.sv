// memory_controller -- arbiter of the global SRAM.
//
// Three requesters share the single-ported global SRAM: the SNN core (0), the BTPE (1) and
// the external/HBM side (2). Each presents a mem_req_t and holds it until granted. One
// request is granted per cycle, round-robin: the search starts after the requester that won
// last, so a busy requester cannot starve the others. A granted read returns its data with
// rvalid[i] high in the next cycle; the data bus is shared by all requesters. Arbitrating
// the concurrent SNN-core and BTPE accesses follows the source design; round-robin, the third
// port and the timing are this design's choices.
module memory_controller
  import spikon_pkg::*;
#(
  parameter int unsigned NREQ = 3
) (
  input  logic                clk,
  input  logic                rst_n,
  input  mem_req_t            req [NREQ],
  output logic [NREQ-1:0]     gnt,
  output logic [NREQ-1:0]     rvalid,
  output logic [VEC_W-1:0]    rdata,
  // global SRAM
  output logic                sram_en,
  output logic                sram_we,
  output logic [GADDR_W-1:0]  sram_addr,
  output logic [VEC_W-1:0]    sram_wdata,
  input  logic [VEC_W-1:0]    sram_rdata,
  output logic [NREQ-1:0]     conflicts    // requester i waited while another was served
);

  logic [$clog2(NREQ)-1:0] last, win;
  logic                    any;

  always_comb begin
    any = 1'b0;
    win = last;
    for (int k = 1; k <= NREQ; k++) begin
      int unsigned i;
      i = (int'(last) + k) % NREQ;
      if (!any && req[i].valid) begin
        any = 1'b1;
        win = $clog2(NREQ)'(i);
      end
    end
    gnt = '0;
    if (any) gnt[win] = 1'b1;
    for (int i = 0; i < NREQ; i++) conflicts[i] = req[i].valid && !gnt[i];
  end

  assign sram_en    = any;
  assign sram_we    = req[win].we;
  assign sram_addr  = req[win].addr;
  assign sram_wdata = req[win].wdata;
  assign rdata      = sram_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last   <= '0;
      rvalid <= '0;
    end else begin
      rvalid <= '0;
      if (any) begin
        last <= win;
        rvalid[win] <= !req[win].we;
      end
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));

endmodule

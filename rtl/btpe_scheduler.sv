// btpe_scheduler -- the BTPE's local scheduler, a finite state machine.
//
// For one job (descriptor btpe_job_t) it
//   LOAD_B  reads data_volume B words from the global SRAM into the local buffer;
//   LOAD_A  for each active lane l, reads data_volume A words starting at a_base + l*dv and
//           writes each, with the matching local-buffer B word, into lane l's input buffers;
//   RUN     starts all active lanes together;
//   WAIT    waits until every active lane is done (lanes with reuse finish in cascade, each
//           after the lane before it);
//   WB      writes lane l's 64 results to out_base + l;
// and then raises 'done' until the next start. Requests use the global-SRAM port: a request
// is held until granted; read data returns with 'mem_rvalid' one or more cycles later, in
// request order. Loading, distribution and write-back under an FSM follow the source
// design; the states, the job descriptor and the address layout are this design's choices.
module btpe_scheduler
  import spikon_pkg::*;
#(
  parameter int unsigned NLANES = 24,
  parameter int unsigned AW     = 6
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  btpe_job_t         job,
  output btpe_job_t         cur_job,
  // global SRAM port
  output mem_req_t          mem_req,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [2047:0]     wb_data,     // result of lane wb_lane (from the rearranger)
  // local buffer
  output logic              lb_we,
  output logic [AW-1:0]     lb_addr,
  // lane fill
  output logic              fill_we,
  output logic [4:0]        fill_lane,
  // lanes
  output logic [NLANES-1:0] lane_start,
  input  logic [NLANES-1:0] lane_done,
  input  logic [NLANES-1:0] lane_active,
  output logic [4:0]        wb_lane,
  output logic              busy,
  output logic              done
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD_B, S_LOAD_A, S_RUN, S_WAIT, S_WB} state_e;

  state_e          state;
  logic [DV_W-1:0] req_k, rsp_k;
  logic [4:0]      lane;

  assign busy = state != S_IDLE;

  // request generation
  always_comb begin
    mem_req = '0;
    unique case (state)
      S_LOAD_B: if (req_k < cur_job.data_volume) begin
        mem_req.valid = 1'b1;
        mem_req.addr  = cur_job.b_base + GADDR_W'(req_k);
      end
      S_LOAD_A: if (req_k < cur_job.data_volume) begin
        mem_req.valid = 1'b1;
        mem_req.addr  = cur_job.a_base + GADDR_W'(lane) * GADDR_W'(cur_job.data_volume)
                      + GADDR_W'(req_k);
      end
      S_WB: begin
        mem_req.valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = cur_job.out_base + GADDR_W'(lane);
        mem_req.wdata = wb_data;
      end
      default: ;
    endcase
  end

  assign lb_we     = (state == S_LOAD_B) && mem_rvalid;
  assign fill_we   = (state == S_LOAD_A) && mem_rvalid;
  assign lb_addr   = rsp_k[AW-1:0];
  assign fill_lane = lane;
  assign wb_lane   = lane;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur_job    <= '0;
      req_k      <= '0;
      rsp_k      <= '0;
      lane       <= '0;
      lane_start <= '0;
      done       <= 1'b0;
    end else begin
      lane_start <= '0;
      if (mem_req.valid && mem_gnt && !mem_req.we) req_k <= req_k + 1'b1;
      if (mem_rvalid) rsp_k <= rsp_k + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          cur_job <= job;
          done    <= 1'b0;
          req_k   <= '0;
          rsp_k   <= '0;
          lane    <= '0;
          state   <= S_LOAD_B;
        end
        S_LOAD_B: if (mem_rvalid && rsp_k == cur_job.data_volume - 1'b1) begin
          req_k <= '0;
          rsp_k <= '0;
          state <= S_LOAD_A;
        end
        S_LOAD_A: if (mem_rvalid && rsp_k == cur_job.data_volume - 1'b1) begin
          req_k <= '0;
          rsp_k <= '0;
          if (lane == cur_job.nlanes - 1'b1) begin
            lane  <= '0;
            state <= S_RUN;
          end else begin
            lane <= lane + 1'b1;
          end
        end
        S_RUN: begin
          lane_start <= lane_active;
          state      <= S_WAIT;
        end
        S_WAIT: if (&(lane_done | ~lane_active) && lane_start == '0) state <= S_WB;
        S_WB: if (mem_gnt) begin
          if (lane == cur_job.nlanes - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            lane <= lane + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

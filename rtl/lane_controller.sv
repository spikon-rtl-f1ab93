// lane_controller -- the local controller of a BTP-dataflow lane.
//
// Sequences one lane job:
//   CLEAR     empty the PS/CT registers of all 64 PUs;
//   RUN       read input-buffer words 0 .. data_volume-1, one per cycle; the buffers answer
//             one clock later, so 'pu_valid' is the read strobe delayed by one clock;
//   WAIT_PU   wait until every PU has counted data_volume pairs (pu_done);
//   WAIT_PREV with reuse, wait until the previous lane has written its results (prev_ready);
//   DRAIN     issue the four 16-word beats to the output aggregator, and with reuse read the
//             matching beat of the previous lane's local SRAM (it arrives together with the
//             aggregator's input strobe);
//   FLUSH     wait for the aggregator's last beat, then raise 'done' and go idle.
// 'done' stays high until the next start; the next lane uses it as its prev_ready, which
// gives the cascade of reuse across timesteps. Generating done when the PU arrays and the
// aggregator have finished follows the source design; the state sequence is this design's.
// Latency of a job: data_volume + 2 cycles to compute, plus the wait for the previous lane,
// plus 6 cycles of drain.
module lane_controller
  import spikon_pkg::*;
#(
  parameter int unsigned AW = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [DV_W-1:0] data_volume,
  input  logic            reuse_en,
  input  logic [11:0]     sr_base,
  input  logic            pu_done,
  input  logic            prev_ready,
  input  logic            oa_out_valid,
  input  logic [1:0]      oa_out_idx,
  output logic [AW-1:0]   buf_raddr,
  output logic            pu_clear,
  output logic            pu_valid,
  output logic            oa_in_valid,
  output logic [1:0]      oa_in_idx,
  output logic            reuse_re,
  output logic [11:0]     reuse_raddr,
  output logic            busy,
  output logic            done
);

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_RUN, S_WAIT_PU, S_WAIT_PREV, S_DRAIN, S_FLUSH}
    state_e;

  state_e          state;
  logic [DV_W-1:0] k;
  logic [1:0]      j;

  assign pu_clear    = state == S_CLEAR;
  assign buf_raddr   = k[AW-1:0];
  assign reuse_re    = (state == S_DRAIN) && reuse_en;
  assign reuse_raddr = sr_base + 12'(j);
  assign busy        = state != S_IDLE;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      k           <= '0;
      j           <= '0;
      pu_valid    <= 1'b0;
      oa_in_valid <= 1'b0;
      oa_in_idx   <= '0;
      done        <= 1'b0;
    end else begin
      pu_valid    <= 1'b0;
      oa_in_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_CLEAR;
          done  <= 1'b0;
        end
        S_CLEAR: begin
          k     <= '0;
          state <= (data_volume == '0) ? S_WAIT_PU : S_RUN;
        end
        S_RUN: begin
          pu_valid <= 1'b1;
          k        <= k + 1'b1;
          if (k == data_volume - 1'b1) state <= S_WAIT_PU;
        end
        S_WAIT_PU: if (pu_done && !pu_valid) begin
          j     <= '0;
          state <= reuse_en ? S_WAIT_PREV : S_DRAIN;
        end
        S_WAIT_PREV: if (prev_ready) state <= S_DRAIN;
        S_DRAIN: begin
          oa_in_valid <= 1'b1;
          oa_in_idx   <= j;
          j           <= j + 1'b1;
          if (j == 2'd3) state <= S_FLUSH;
        end
        S_FLUSH: if (oa_out_valid && oa_out_idx == 2'd3) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

// top_controller -- the accelerator's top controller.
//
// Coordinates the BTPE and the SNN core through their start/done signals. One training
// run is n_steps steps; in each step the BTPE runs its vector-matrix job and the SNN core
// runs its program (for instance the LIF update of the BTPE's outputs). In sequential mode
// the core starts after the BTPE has finished; in concurrent mode both start together
// (for example the core working on another layer or timestep) and the memory controller
// arbitrates their accesses. 'done' rises after the last step and stays high until the
// next start. Managing the run through start signals follows the source design; the step
// sequence and the concurrent mode are this design's choices.
// Timing: a start pulse is one cycle long; the controller ignores done flags for the cycle
// in which a unit is being started.
module top_controller (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_steps,
  input  logic        concurrent,
  output logic        btpe_start,
  input  logic        btpe_done,
  output logic        core_start,
  input  logic        core_done,
  output logic [15:0] step,
  output logic        busy,
  output logic        done
);

  typedef enum logic [2:0] {S_IDLE, S_LAUNCH, S_WAIT_BTPE, S_CORE, S_WAIT_CORE, S_WAIT_BOTH} state_e;
  state_e state;

  assign busy = state != S_IDLE;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      btpe_start <= 1'b0;
      core_start <= 1'b0;
      step       <= '0;
      done       <= 1'b0;
    end else begin
      btpe_start <= 1'b0;
      core_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          done  <= 1'b0;
          step  <= '0;
          state <= (n_steps == '0) ? S_IDLE : S_LAUNCH;
          if (n_steps == '0) done <= 1'b1;
        end
        S_LAUNCH: begin
          btpe_start <= 1'b1;
          core_start <= concurrent;
          state      <= concurrent ? S_WAIT_BOTH : S_WAIT_BTPE;
        end
        S_WAIT_BTPE: if (!btpe_start && btpe_done) state <= S_CORE;
        S_CORE: begin
          core_start <= 1'b1;
          state      <= S_WAIT_CORE;
        end
        S_WAIT_CORE, S_WAIT_BOTH:
          if (!btpe_start && !core_start && btpe_done && core_done) begin
            step <= step + 1'b1;
            if (step + 1'b1 == n_steps) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              state <= S_LAUNCH;
            end
          end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

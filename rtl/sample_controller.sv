// sample_controller: sequences one sampling run of N_s samples.
//
// On start (accepted when not busy) it pulses init for one clock, which loads the
// sampler with a random state and clears the hitting engine, then holds step high for
// exactly num_samples clocks (the paper's N_s; the sampler produces one sample per
// clock), then waits in DRAIN until the hitting engine reports idle, and finally
// raises done until the next start. num_samples = 0 gives an empty run.
// The state machine and the drain wait are this design's choice; the paper gives only
// N_s and the one-sample-per-clock rate.
//
// Interface: start, num_samples (latched at start), engine_idle; outputs init, step,
// busy, done. Timing: step is high in clocks 2 .. num_samples+1 after the start clock.
module sample_controller (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num_samples,
  input  logic        engine_idle,
  output logic        init,
  output logic        step,
  output logic        busy,
  output logic        done
);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_RUN, S_DRAIN, S_DONE} state_e;

  state_e      state;
  logic [31:0] remaining;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      remaining <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE:
          if (start) begin
            remaining <= num_samples;
            state     <= S_INIT;
          end
        S_INIT:
          state <= (remaining == 0) ? S_DRAIN : S_RUN;
        S_RUN: begin
          remaining <= remaining - 1;
          if (remaining == 1) state <= S_DRAIN;
        end
        S_DRAIN:
          if (engine_idle) state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign init = (state == S_INIT);
  assign step = (state == S_RUN);
  assign busy = (state == S_INIT) || (state == S_RUN) || (state == S_DRAIN);
  assign done = (state == S_DONE);

endmodule

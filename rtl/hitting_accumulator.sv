// hitting_accumulator: two-cycle log-probability accumulator of the hitting time engine.
//
// For a visible state v the RBM's unnormalised log-probability, with the softplus
// log(1 + e^x) replaced by max(x, 0) as in the paper, is
//   L(v) = sum_i b_v[i] v[i] + sum_j max(x_h[j], 0),   x_h[j] = b_h[j] + sum_i W[i][j] v[i].
// The hidden pre-activations x_h are already computed by the hidden neurons, so this
// unit only stores them (clamped at 0) together with v when load is high, then adds
// half of the terms in each of the next two clocks: first the lower halves of both the
// hidden sums and the visible-bias terms, then the upper halves. This two-cycle split
// follows the paper, which uses it to meet timing; two of these units alternate so
// that one log-probability is finished every clock.
//
// Interface: load with vis_in / hid_preact_in (the current sample); vis_bias read live
// (it must not change during a run). valid pulses for one clock with vis_out and
// logprob in clock t+3 when load was high in clock t (store, first half, second
// half, registered result). load may coincide with the clock in which
// the second half is added (back-to-back every other clock), but not with the first.
module hitting_accumulator
  import rbm_pkg::*;
#(
  parameter int unsigned NV     = DEFAULT_N,
  parameter int unsigned NH     = DEFAULT_N,
  parameter int unsigned ACC_HW = preact_width(NV),
  parameter int unsigned LP_W   = logprob_width(NV, NH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic [NV-1:0]            vis_in,
  input  logic signed [ACC_HW-1:0] hid_preact_in [NH],
  input  weight_t                  vis_bias [NV],
  output logic                     busy,
  output logic                     valid,
  output logic [NV-1:0]            vis_out,
  output logic signed [LP_W-1:0]   logprob
);

  typedef enum logic [1:0] {PH_IDLE, PH_FIRST, PH_SECOND} phase_e;

  phase_e                  phase;
  logic [NV-1:0]           vis_q;
  logic [ACC_HW-1:0]       relu_q [NH];   // max(x_h, 0): non-negative
  logic signed [LP_W-1:0]  acc_q;
  logic signed [LP_W-1:0]  part;          // sum of the half selected by phase

  always_comb begin
    part = '0;
    for (int j = 0; j < NH; j++)
      if ((j < NH / 2) == (phase == PH_FIRST)) part = part + LP_W'(relu_q[j]);
    for (int i = 0; i < NV; i++)
      if (((i < NV / 2) == (phase == PH_FIRST)) && vis_q[i]) part = part + LP_W'(vis_bias[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= PH_IDLE;
      vis_q   <= '0;
      acc_q   <= '0;
      valid   <= 1'b0;
      vis_out <= '0;
      logprob <= '0;
      for (int j = 0; j < NH; j++) relu_q[j] <= '0;
    end else begin
      valid <= 1'b0;
      unique case (phase)
        PH_FIRST: begin
          acc_q <= part;
          phase <= PH_SECOND;
        end
        PH_SECOND: begin
          logprob <= acc_q + part;
          vis_out <= vis_q;
          valid   <= 1'b1;
          phase   <= PH_IDLE;
        end
        default: ;
      endcase
      if (load) begin
        vis_q <= vis_in;
        for (int j = 0; j < NH; j++)
          relu_q[j] <= hid_preact_in[j][ACC_HW-1] ? '0 : ACC_HW'(hid_preact_in[j]);
        phase <= PH_FIRST;
      end
    end
  end

  assign busy = (phase != PH_IDLE);

  // A new sample may only be loaded when the unit is idle or finishing.
  a_load_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> phase != PH_FIRST);

endmodule

// gibbs_sampler: block Gibbs sampling on the RBM, one new sample per clock.
//
// Holds the visible state v (NV bits) and hidden state h (NH bits) in registers.
// The hidden layer computes its pre-activations from v through the columns of W,
//   x_h[j] = b_h[j] + sum_i W[i][j] v[i],
// and the visible layer from h through the rows of W,
//   x_v[i] = b_v[i] + sum_j W[i][j] h[j].
// On every clock with step = 1 both layers are resampled at once:
//   v <= sample(x_v(h)),  h <= sample(x_h(v)).
// This keeps both halves of the hardware busy and gives one new visible sample per
// clock, matching the paper's "1 sample each cycle"; it is equivalent to two
// interleaved block Gibbs chains (v0,h1,v2,... and h0,v1,h2,...), each of which
// alternates layers as in the paper's Fig. 1C. The concurrent update is this
// design's reading of the paper, which gives the rate but not the schedule.
//
// init = 1 loads both layers with random bits (start of a run, this design's choice).
// Outputs: vis_state / hid_state (the current registered sample) and hid_preact, the
// hidden pre-activations of the current v, used by the hitting time engine.
// Timing: a sample appears in vis_state one clock after the step that produced it.
module gibbs_sampler
  import rbm_pkg::*;
#(
  parameter int unsigned NV     = DEFAULT_N,
  parameter int unsigned NH     = DEFAULT_N,
  parameter logic [31:0] SEED   = 32'h1234_5678,
  parameter int unsigned ACC_VW = preact_width(NH),  // visible pre-activation width
  parameter int unsigned ACC_HW = preact_width(NV)   // hidden pre-activation width
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     init,
  input  logic                     step,
  input  weight_t                  weights  [NV][NH],
  input  weight_t                  vis_bias [NV],
  input  weight_t                  hid_bias [NH],
  output logic [NV-1:0]            vis_state,
  output logic [NH-1:0]            hid_state,
  output logic signed [ACC_HW-1:0] hid_preact [NH]
);

  logic [PROB_W-1:0] rnd_vis [NV];
  logic [PROB_W-1:0] rnd_hid [NH];

  rng_bank #(.N(NV), .SEED(SEED)) u_rng_vis (.clk, .rst_n, .rnd(rnd_vis));
  rng_bank #(.N(NH), .SEED(SEED ^ 32'hA5A5_5A5A)) u_rng_hid (.clk, .rst_n, .rnd(rnd_hid));

  // Columns of W seen as rows for the hidden layer (wiring only).
  weight_t weights_t [NH][NV];
  always_comb begin
    for (int j = 0; j < NH; j++)
      for (int i = 0; i < NV; i++) weights_t[j][i] = weights[i][j];
  end

  logic signed [ACC_VW-1:0] vis_preact_unused [NV];  // not needed outside the layer
  logic [NV-1:0]            vis_next;
  logic [NH-1:0]            hid_next;

  rbm_layer #(.N_OUT(NV), .N_IN(NH), .ACC_W(ACC_VW)) u_visible (
    .state_in (hid_state),
    .weights  (weights),
    .bias     (vis_bias),
    .rnd      (rnd_vis),
    .preact   (vis_preact_unused),
    .fire     (vis_next)
  );

  rbm_layer #(.N_OUT(NH), .N_IN(NV), .ACC_W(ACC_HW)) u_hidden (
    .state_in (vis_state),
    .weights  (weights_t),
    .bias     (hid_bias),
    .rnd      (rnd_hid),
    .preact   (hid_preact),
    .fire     (hid_next)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vis_state <= '0;
      hid_state <= '0;
    end else if (init) begin
      for (int i = 0; i < NV; i++) vis_state[i] <= rnd_vis[i][PROB_W-1];
      for (int j = 0; j < NH; j++) hid_state[j] <= rnd_hid[j][PROB_W-1];
    end else if (step) begin
      vis_state <= vis_next;
      hid_state <= hid_next;
    end
  end

endmodule

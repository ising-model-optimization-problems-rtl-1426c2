// rbm_layer: a layer of N_OUT stochastic neurons sampled in parallel.
//
// Because the RBM has no connections inside a layer, all neurons of a layer can be
// sampled in the same clock from the other layer's state (paper, Fig. 1C). Neuron o
// uses weight row weights[o][*], bias[o] and random number rnd[o].
// Interface: state_in is the other layer's N_IN-bit state; fire is the new N_OUT-bit
// sample, preact the neurons' pre-activations. Purely combinational.
module rbm_layer
  import rbm_pkg::*;
#(
  parameter int unsigned N_OUT = DEFAULT_N,
  parameter int unsigned N_IN  = DEFAULT_N,
  parameter int unsigned ACC_W = preact_width(N_IN)
) (
  input  logic [N_IN-1:0]         state_in,
  input  weight_t                 weights [N_OUT][N_IN],
  input  weight_t                 bias    [N_OUT],
  input  logic [PROB_W-1:0]       rnd     [N_OUT],
  output logic signed [ACC_W-1:0] preact  [N_OUT],
  output logic [N_OUT-1:0]        fire
);

  for (genvar o = 0; o < N_OUT; o++) begin : g_neuron
    logic [PROB_W:0] prob_unused;
    stochastic_neuron #(.N_IN(N_IN), .ACC_W(ACC_W)) u_neuron (
      .state_in (state_in),
      .weights  (weights[o]),
      .bias     (bias[o]),
      .rnd      (rnd[o]),
      .preact   (preact[o]),
      .prob     (prob_unused),
      .fire     (fire[o])
    );
  end

endmodule

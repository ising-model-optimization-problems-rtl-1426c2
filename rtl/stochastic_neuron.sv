// stochastic_neuron: one binary stochastic RBM neuron.
//
// Computes the pre-activation  x = bias + sum_k w[k] * s[k]  over its N_IN binary
// inputs s (the other layer's state). Because the inputs are 0/1 the products are
// just a selection, so the sum is a fixed-point accumulation of the selected 9-bit
// weights, as the paper describes. x goes through the sigmoid approximation to give
// the firing probability p, and the neuron fires (out = 1) when the lane's uniform
// random number is below p, so that P(out = 1) = sigmoid(x), as in the paper's
// activation p(v_i = 1 | h) = sigma(w_i^T h + b_i).
//
// The pre-activation is also an output: the hidden layer's sums are reused by the
// hitting time engine (paper, Methods). Purely combinational; the caller registers
// the result. The accumulation is written as a loop; a synthesis tool builds an adder
// tree or chain from it, and pipelining it is left to the implementation.
module stochastic_neuron
  import rbm_pkg::*;
#(
  parameter int unsigned N_IN  = DEFAULT_N,
  parameter int unsigned ACC_W = preact_width(N_IN)
) (
  input  logic [N_IN-1:0]         state_in,
  input  weight_t                 weights [N_IN],
  input  weight_t                 bias,
  input  logic [PROB_W-1:0]       rnd,
  output logic signed [ACC_W-1:0] preact,
  output logic [PROB_W:0]         prob,
  output logic                    fire
);

  always_comb begin
    preact = ACC_W'(bias);
    for (int k = 0; k < N_IN; k++) begin
      if (state_in[k]) preact = preact + ACC_W'(weights[k]);
    end
  end

  sigmoid_approx #(.IN_W(ACC_W)) u_sigmoid (
    .x (preact),
    .p (prob)
  );

  assign fire = ({1'b0, rnd} < prob);

endmodule

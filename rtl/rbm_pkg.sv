// rbm_pkg: types and constants shared by the RBM Ising-machine RTL.
//
// Number format: weights and biases are 9-bit two's-complement fixed point with
// FRAC_W = 2 fractional bits (step 0.25). The 9-bit width follows the paper; the
// position of the binary point is this design's choice, made so that the inverse
// temperature beta can be folded into the stored weights in steps of 2^-2, the
// granularity the paper reports for beta. Firing probabilities are unsigned
// fractions with PROB_W = 16 bits (this design's choice).
package rbm_pkg;

  localparam int unsigned WEIGHT_W  = 9;    // weight / bias width (paper: 9 bit)
  localparam int unsigned FRAC_W    = 2;    // fractional bits of weights, biases, sums
  localparam int unsigned PROB_W    = 16;   // probability / random-number width
  localparam int unsigned DEFAULT_N = 200;  // visible = hidden nodes (paper: up to 200x200)

  typedef logic signed [WEIGHT_W-1:0] weight_t;

  // Which parameter a host write addresses.
  typedef enum logic [1:0] {
    SEL_WEIGHT   = 2'd0,  // w[row][col], row = visible index, col = hidden index
    SEL_VIS_BIAS = 2'd1,  // visible bias [row]
    SEL_HID_BIAS = 2'd2   // hidden bias  [col]
  } param_sel_e;

  // What the accelerator pushes to the host.
  typedef enum logic {
    MODE_RAW     = 1'b0,  // every visible sample is streamed out
    MODE_HITTING = 1'b1   // only the best (highest log-probability) state at the end
  } out_mode_e;

  // Width of a neuron pre-activation: bias plus n_in weights, no overflow possible.
  function automatic int unsigned preact_width(int unsigned n_in);
    return WEIGHT_W + $clog2(n_in + 1) + 1;
  endfunction

  // Width of a hitting-engine log-probability: nv bias terms plus nh hidden sums.
  function automatic int unsigned logprob_width(int unsigned nv, int unsigned nh);
    return preact_width(nv) + $clog2(nv + nh + 1) + 1;
  endfunction

endpackage

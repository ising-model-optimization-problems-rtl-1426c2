// rbm_model_pkg: reference arithmetic shared by the testbenches.
// Written independently of the RTL: real-valued sigmoid, plain integer sums.
package rbm_model_pkg;

  localparam real ONE = 65536.0;  // probability 1.0 at 16 bits

  // Exact sigmoid of a pre-activation given in quarters (2 fractional bits), scaled
  // to 65536 (= probability 1.0), not rounded.
  function automatic real sig_real(longint q);
    return ONE / (1.0 + $exp(-real'(q) / 4.0));
  endfunction

  // Is a neuron's decision consistent with firing when rnd < sigma(x)? Decisions
  // within 1.5 LSB of the threshold may go either way (hardware rounding).
  function automatic bit fire_ok(longint q, int rnd, bit fire);
    real p;
    p = sig_real(q);
    if (real'(rnd) < p - 1.5) return fire == 1'b1;
    if (real'(rnd) > p + 1.5) return fire == 1'b0;
    return 1'b1;
  endfunction

  function automatic longint relu(longint q);
    return (q < 0) ? 0 : q;
  endfunction

endpackage

// sigmoid_approx: fixed-point logistic sigmoid, p = 1 / (1 + exp(-x)).
//
// The paper credits part of its speed to an "efficient sigmoid approximation" but
// does not give it. This design uses a small table: because x has FRAC_W = 2
// fractional bits, sigma only has to be known at multiples of 0.25. The table holds
// sigma(k/4) for k = 0 .. 63 (|x| < 16) as a fraction of 2^PROB_W, rounded; for
// |x| >= 16 the probability is 1 (sigma(16) rounds to 1 at 16 bits anyway), and a
// negative x uses the symmetry sigma(-x) = 1 - sigma(x). The table must keep the
// tails: at the operating points of interest many pre-activations sit around |x| = 5
// to 10, where the small chance of a flip (e.g. 0.25 % at |x| = 6) is what lets the
// Markov chain keep exploring. A cruder approximation that saturates at |x| = 5 freezes
// the chain.
//
// The table is computed at elaboration with integer arithmetic only: e^(-k/4) by
// repeated multiplication with e^(-1/4) in 32-bit fixed point, then
// round(2^PROB_W / (1 + e^(-k/4))). Error below one output LSB.
//
// Interface: x is signed with FRAC_W fractional bits; p is an unsigned fraction of
// 2^PROB_W, in [0, 2^PROB_W] (PROB_W+1 bits so that exactly 1.0 is representable).
// Purely combinational (a 64-entry constant table and a subtractor).
module sigmoid_approx
  import rbm_pkg::*;
#(
  parameter int unsigned IN_W = 18
) (
  input  logic signed [IN_W-1:0] x,
  output logic [PROB_W:0]        p
);

  localparam int unsigned TBL = 16 << FRAC_W;                 // entries: |x| < 16
  localparam logic [63:0] ONE_Q32  = 64'h1_0000_0000;
  localparam logic [63:0] EXP_STEP = 64'd3344913648;         // round(e^-0.25 * 2^32)

  if (FRAC_W != 2) begin : g_bad_frac
    $error("sigmoid_approx: table step e^-0.25 assumes FRAC_W = 2");
  end

  function automatic logic [PROB_W:0] sigma_entry(int unsigned k);
    logic [63:0] t;      // e^(-k/4) in Q32
    logic [63:0] den;
    t = ONE_Q32;
    for (int unsigned i = 0; i < k; i++) t = (t * EXP_STEP + 64'h8000_0000) >> 32;
    den = ONE_Q32 + t;
    return (PROB_W+1)'(((64'(1) << (PROB_W + 32)) + (den >> 1)) / den);
  endfunction

  logic [PROB_W:0] table_q [TBL];
  for (genvar k = 0; k < TBL; k++) begin : g_table
    assign table_q[k] = sigma_entry(k);
  end

  logic [IN_W-1:0] ax;          // |x|, unsigned
  logic [PROB_W:0] y;           // sigma(|x|)

  always_comb begin
    ax = x[IN_W-1] ? IN_W'(-x) : IN_W'(x);
    if (32'(ax) >= TBL) y = (PROB_W+1)'(1 << PROB_W);
    else                y = table_q[ax[$clog2(TBL)-1:0]];
    p = x[IN_W-1] ? (PROB_W+1)'((1 << PROB_W) - 32'(y)) : y;
  end

endmodule

// rng_bank: one uniform random number per lane per clock for the stochastic neurons.
//
// The paper's neurons fire with probability sigma(x) but it does not say how the
// randomness is produced. This design gives every lane its own 32-bit xorshift
// generator (x ^= x<<13; x ^= x>>17; x ^= x<<5) and hands the top PROB_W bits of the
// current state to the neuron. Lane i is seeded from SEED and i through a
// multiplicative hash so that lanes start far apart; a zero seed is avoided.
// The generators step on every clock, whether or not the sampler runs, so that
// successive runs see different random streams.
//
// Timing: rnd[i] is a register output; it changes one clock after each edge.
module rng_bank
  import rbm_pkg::*;
#(
  parameter int unsigned N    = DEFAULT_N,
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic [PROB_W-1:0] rnd [N]
);

  function automatic logic [31:0] lane_seed(int unsigned lane);
    logic [31:0] s;
    s = SEED ^ ((32'(lane) + 32'd1) * 32'h9E37_79B9);
    s = s ^ (s >> 16);
    s = s * 32'h85EB_CA6B;
    s = s ^ (s >> 13);
    return (s == 32'd0) ? 32'h0000_0001 : s;
  endfunction

  function automatic logic [31:0] xorshift32(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  logic [31:0] state [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) state[i] <= lane_seed(i);
    end else begin
      for (int i = 0; i < N; i++) state[i] <= xorshift32(state[i]);
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) rnd[i] = state[i][31 -: PROB_W];
  end

endmodule

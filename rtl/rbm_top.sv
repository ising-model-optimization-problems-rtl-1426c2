// rbm_top: FPGA-style Restricted Boltzmann Machine sampler for Ising problems.
//
// An Ising problem of N spins is embedded into an RBM with NV = NH = N nodes (one
// visible and one hidden copy per spin, tied by the coupling weight on the diagonal
// of W); the host computes and loads W and the biases. This top joins:
//   param_memory      weights and biases, written by the host while idle,
//   gibbs_sampler     both neuron layers, one new visible sample per clock,
//   hitting_engine    log-probability of every sample, best state so far,
//   sample_controller run of num_samples clocks, then done.
// The host link (PCIe in the paper) is not part of this RTL: its traffic appears
// here as plain ports.
//
// Output modes (latched at start): MODE_RAW streams every visible sample on
// raw_valid / raw_vis, one per clock; MODE_HITTING runs the hitting time engine and
// presents best_state / best_logprob with best_valid once the run is done.
// zero_excl_en (latched at start) makes the engine skip all-0 / all-1 states.
// Parameter writes while busy are ignored (this design's choice).
//
// Timing: one sample per clock. With start sampled in clock 0, clock 1 is the init
// clock, clocks 2 .. N_s+1 take the samples, and done is first high in clock N_s+3
// (MODE_RAW) or N_s+6 (MODE_HITTING, which waits for the engine to drain).
module rbm_top
  import rbm_pkg::*;
#(
  parameter int unsigned NV   = DEFAULT_N,
  parameter int unsigned NH   = DEFAULT_N,
  parameter logic [31:0] SEED = 32'h1234_5678,
  localparam int unsigned ROW_W  = (NV > 1) ? $clog2(NV) : 1,
  localparam int unsigned COL_W  = (NH > 1) ? $clog2(NH) : 1,
  localparam int unsigned ACC_HW = preact_width(NV),
  localparam int unsigned LP_W   = logprob_width(NV, NH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host parameter writes
  input  logic                   wr_en,
  input  param_sel_e             wr_sel,
  input  logic [ROW_W-1:0]       wr_row,
  input  logic [COL_W-1:0]       wr_col,
  input  weight_t                wr_data,
  // run control
  input  logic                   start,
  input  logic [31:0]            num_samples,
  input  out_mode_e              out_mode,
  input  logic                   zero_excl_en,
  output logic                   busy,
  output logic                   done,
  // raw sample stream
  output logic                   raw_valid,
  output logic [NV-1:0]          raw_vis,
  // hitting time engine result
  output logic                   best_valid,
  output logic [NV-1:0]          best_state,
  output logic signed [LP_W-1:0] best_logprob
);

  weight_t weights  [NV][NH];
  weight_t vis_bias [NV];
  weight_t hid_bias [NH];

  logic      init, step, engine_idle, best_found;
  logic      update_unused, excluded_unused;
  out_mode_e mode_q;
  logic      zero_excl_q;

  param_memory #(.NV(NV), .NH(NH)) u_params (
    .clk, .rst_n,
    .wr_en    (wr_en && !busy),
    .wr_sel   (wr_sel),
    .wr_row   (wr_row),
    .wr_col   (wr_col),
    .wr_data  (wr_data),
    .weights  (weights),
    .vis_bias (vis_bias),
    .hid_bias (hid_bias)
  );

  sample_controller u_ctrl (
    .clk, .rst_n,
    .start       (start),
    .num_samples (num_samples),
    .engine_idle (engine_idle),
    .init        (init),
    .step        (step),
    .busy        (busy),
    .done        (done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q      <= MODE_RAW;
      zero_excl_q <= 1'b0;
    end else if (start && !busy) begin
      mode_q      <= out_mode;
      zero_excl_q <= zero_excl_en;
    end
  end

  logic [NV-1:0]            vis_state;
  logic [NH-1:0]            hid_state_unused;
  logic signed [ACC_HW-1:0] hid_preact [NH];

  gibbs_sampler #(.NV(NV), .NH(NH), .SEED(SEED)) u_sampler (
    .clk, .rst_n,
    .init       (init),
    .step       (step),
    .weights    (weights),
    .vis_bias   (vis_bias),
    .hid_bias   (hid_bias),
    .vis_state  (vis_state),
    .hid_state  (hid_state_unused),
    .hid_preact (hid_preact)
  );

  hitting_engine #(.NV(NV), .NH(NH)) u_hitting (
    .clk, .rst_n,
    .clear        (init),
    .zero_excl_en (zero_excl_q),
    .sample_valid (step && mode_q == MODE_HITTING),
    .vis_state    (vis_state),
    .hid_preact   (hid_preact),
    .vis_bias     (vis_bias),
    .best_found   (best_found),
    .best_state   (best_state),
    .best_logprob (best_logprob),
    .update       (update_unused),
    .excluded     (excluded_unused),
    .idle         (engine_idle)
  );

  assign raw_valid  = step && mode_q == MODE_RAW;
  assign raw_vis    = vis_state;
  assign best_valid = done && mode_q == MODE_HITTING && best_found;

endmodule

// hitting_engine: keeps the most probable visible state seen during a run.
//
// Every clock with sample_valid the current visible sample and the hidden
// pre-activations computed for it are handed to one of two hitting_accumulator units,
// alternately, so each unit gets a sample every other clock and has two clocks to add
// it up (paper, Methods). When a unit finishes, its log-probability is compared with
// the best so far and, if strictly greater, the state and its log-probability are
// kept. With zero_excl_en set, states whose visible bits are all 0 or all 1 are
// ignored: for MAX-CUT these are the "zero cut" states the paper excludes
// (Supplementary Fig. S3). Ties keep the earlier state (this design's choice).
//
// Interface: clear (start of a run) forgets the best state. best_found tells whether
// any state has been accepted. update / excluded pulse when a finished candidate
// replaced the best or was dropped as a zero-cut state. idle is high when no sample
// is being accumulated. Latency: a sample offered in clock t is reflected in
// best_state / best_logprob from clock t+4.
module hitting_engine
  import rbm_pkg::*;
#(
  parameter int unsigned NV     = DEFAULT_N,
  parameter int unsigned NH     = DEFAULT_N,
  parameter int unsigned ACC_HW = preact_width(NV),
  parameter int unsigned LP_W   = logprob_width(NV, NH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     zero_excl_en,
  input  logic                     sample_valid,
  input  logic [NV-1:0]            vis_state,
  input  logic signed [ACC_HW-1:0] hid_preact [NH],
  input  weight_t                  vis_bias [NV],
  output logic                     best_found,
  output logic [NV-1:0]            best_state,
  output logic signed [LP_W-1:0]   best_logprob,
  output logic                     update,
  output logic                     excluded,
  output logic                     idle
);

  logic                   sel;         // unit that takes the next sample
  logic [1:0]             load, busy, valid;
  logic [NV-1:0]          acc_vis [2];
  logic signed [LP_W-1:0] acc_lp  [2];

  assign load[0] = sample_valid && !sel;
  assign load[1] = sample_valid &&  sel;

  for (genvar u = 0; u < 2; u++) begin : g_acc
    hitting_accumulator #(.NV(NV), .NH(NH), .ACC_HW(ACC_HW), .LP_W(LP_W)) u_acc (
      .clk, .rst_n,
      .load          (load[u]),
      .vis_in        (vis_state),
      .hid_preact_in (hid_preact),
      .vis_bias      (vis_bias),
      .busy          (busy[u]),
      .valid         (valid[u]),
      .vis_out       (acc_vis[u]),
      .logprob       (acc_lp[u])
    );
  end

  // Candidate of this clock: the units finish on alternate clocks.
  logic                   cand_valid, cand_zero;
  logic [NV-1:0]          cand_vis;
  logic signed [LP_W-1:0] cand_lp;

  always_comb begin
    cand_valid = |valid;
    cand_vis   = valid[1] ? acc_vis[1] : acc_vis[0];
    cand_lp    = valid[1] ? acc_lp[1]  : acc_lp[0];
    cand_zero  = (cand_vis == '0) || (cand_vis == '1);
    excluded   = cand_valid && zero_excl_en && cand_zero;
    update     = cand_valid && !excluded && (!best_found || cand_lp > best_logprob);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel          <= 1'b0;
      best_found   <= 1'b0;
      best_state   <= '0;
      best_logprob <= '0;
    end else if (clear) begin
      sel          <= 1'b0;
      best_found   <= 1'b0;
      best_state   <= '0;
      best_logprob <= '0;
    end else begin
      if (sample_valid) sel <= !sel;
      if (update) begin
        best_found   <= 1'b1;
        best_state   <= cand_vis;
        best_logprob <= cand_lp;
      end
    end
  end

  assign idle = !(|busy) && !(|valid);

  a_one_finisher: assert property (@(posedge clk) disable iff (!rst_n) !(valid[0] && valid[1]));

endmodule

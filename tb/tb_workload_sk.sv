// tb_workload_sk: a 150-spin Sherrington-Kirkpatrick glass on the default 200 x 200
// build, the largest SK size in the published benchmark.
//
// Couplings J_ij = +-1 with equal probability, coupling C = 1, beta = 0.25: stored
// weights -4 J_ij, 4 on the diagonal, biases -2 (C - sum_j J_ij). The 50 unused nodes
// get zero weights and bias -256, which pins them at 0. The run takes NS = 2000
// samples in hitting-time mode (the published SK runs need fewer than 2000).
// Checks: every sample's log-probability is recomputed here and the engine must
// report the best of them; the run must take NS + 6 clocks; the Ising energy
// sum_{i<j} J s_i s_j of the reported state must reach 80 % of -0.763 N^1.5, the known
// large-N ground-state energy of this ensemble; unused nodes must be 0 in every
// sample after the random initial one.
module tb_workload_sk;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned NB = DEFAULT_N;   // built size
  localparam int unsigned N  = 150;         // problem size
  localparam int          C  = 1;
  localparam int          NS = 2000;
  localparam int unsigned LP_W = logprob_width(NB, NB);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  param_sel_e wr_sel = SEL_WEIGHT;
  logic [7:0] wr_row = '0, wr_col = '0;
  weight_t wr_data = '0;
  logic start = 0;
  logic [31:0] num_samples = '0;
  out_mode_e out_mode = MODE_HITTING;
  logic zero_excl_en = 0;
  logic busy, done, raw_valid, best_valid;
  logic [NB-1:0] raw_vis, best_state;
  logic signed [LP_W-1:0] best_logprob;

  rbm_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_upd = 0;
  int J [N][N];
  int Wq [NB][NB];
  int Bq [NB];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (dut.u_hitting.update) n_upd++;

  function automatic longint logprob(logic [NB-1:0] v);
    longint s;
    s = 0;
    for (int i = 0; i < NB; i++) if (v[i]) s += Bq[i];
    for (int j = 0; j < NB; j++) begin
      longint x;
      x = Bq[j];
      for (int i = 0; i < NB; i++) if (v[i]) x += Wq[i][j];
      s += relu(x);
    end
    return s;
  endfunction
  function automatic int energy(logic [NB-1:0] v);
    int e;
    e = 0;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) e += J[i][j] * ((v[i] == v[j]) ? 1 : -1);
    return e;
  endfunction

  initial begin
    int cycles, samples;
    bit found;
    longint best_lp;
    logic [NB-1:0] best_v;
    real e_ref;
    for (int i = 0; i < N; i++) J[i][i] = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin J[i][j] = ($urandom_range(0, 1) == 1) ? 1 : -1; J[j][i] = J[i][j]; end
    for (int i = 0; i < NB; i++) begin
      for (int j = 0; j < NB; j++) Wq[i][j] = 0;
      Bq[i] = -256;
    end
    for (int i = 0; i < N; i++) begin
      int rs;
      rs = 0;
      for (int j = 0; j < N; j++) begin
        Wq[i][j] = (i == j) ? 4 * C : -4 * J[i][j];
        rs += (i == j) ? C : -J[i][j];
      end
      Bq[i] = -2 * rs;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);
    wr_en = 1;
    for (int i = 0; i < NB; i++)
      for (int j = 0; j < NB; j++) begin
        wr_sel = SEL_WEIGHT; wr_row = 8'(i); wr_col = 8'(j); wr_data = weight_t'(Wq[i][j]);
        @(negedge clk);
      end
    for (int i = 0; i < NB; i++) begin
      wr_sel = SEL_VIS_BIAS; wr_row = 8'(i); wr_data = weight_t'(Bq[i]); @(negedge clk);
      wr_sel = SEL_HID_BIAS; wr_col = 8'(i); wr_data = weight_t'(Bq[i]); @(negedge clk);
    end
    wr_en = 0;

    @(negedge clk);
    num_samples = NS; start = 1;
    @(negedge clk);
    start = 0; cycles = 1; samples = 0; found = 0; best_lp = 0; best_v = '0;
    while (!done && cycles < NS + 100) begin
      if (dut.step) begin
        logic [NB-1:0] v;
        longint lp;
        v = dut.u_sampler.vis_state;
        samples++;
        lp = logprob(v);
        if (!found || lp > best_lp) begin found = 1; best_lp = lp; best_v = v; end
        // the first sample is the random initial state; from then on unused nodes are 0
        if (samples > 1) begin
          checks++;
          if (v[NB-1:N] != '0) begin failures++; $display("unused node not 0 in sample %0d", samples); end
        end
      end
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (samples != NS || cycles != NS + 6) begin failures++; $display("samples %0d clocks %0d", samples, cycles); end
    checks++;
    if (!best_valid || longint'(best_logprob) != best_lp || best_state !== best_v) begin
      failures++; $display("engine best lp %0d, model %0d", best_logprob, best_lp);
    end
    e_ref = -0.763 * $pow(real'(N), 1.5);
    checks++;
    if (real'(energy(best_state)) > 0.8 * e_ref) begin
      failures++; $display("energy %0d, reference %f", energy(best_state), e_ref);
    end
    checks++;
    if (n_upd == 0) failures++;
    $display("SK N=%0d: best energy %0d (large-N estimate of the ground state %0.0f) after %0d samples, %0d updates",
             N, energy(best_state), e_ref, NS, n_upd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

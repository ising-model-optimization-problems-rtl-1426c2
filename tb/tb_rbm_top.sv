// tb_rbm_top: end-to-end test of the RBM Ising sampler at 8 x 8 nodes.
//
// Problems are built here and embedded as described in the README: for an Ising
// "log-weight" K (K[i][j] = -J[i][j], K[i][i] = C) the stored weights are 4K and the
// stored biases -2 * sum_j K[i][j] (beta = 0.25 folded into the 2-fractional-bit
// format). Workloads: a dense MAX-CUT graph (edge probability 0.5) and an SK
// spin glass (J = +-1, C = 1), both solved exactly here by enumeration. The MAX-CUT
// coupling is C = 2 (plusarg +C=<n> overrides): the best coupling grows with problem
// size, and the C = 12 used at 150 nodes freezes an 8-node chain.
//
// Checks: every sample's log-probability is recomputed here from the probed visible
// state and the testbench's own copy of the parameters, and the hitting engine's
// result must equal the best of them (with and without zero-cut exclusion); the
// reported state must be the exact MAX-CUT / SK ground state; the raw stream must
// deliver exactly N_s samples, one per clock; run lengths are checked in clocks; a
// parameter write during a run must be ignored. Mechanisms counted (each must occur):
// raw samples, best-state updates, zero-cut exclusions, writes dropped while busy,
// loads into each of the two accumulators (saturated sigmoids, |x| >= 16, are only
// counted).
module tb_rbm_top;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned LP_W = logprob_width(N, N);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  param_sel_e wr_sel = SEL_WEIGHT;
  logic [2:0] wr_row = '0, wr_col = '0;
  weight_t wr_data = '0;
  logic start = 0;
  logic [31:0] num_samples = '0;
  out_mode_e out_mode = MODE_RAW;
  logic zero_excl_en = 0;
  logic busy, done, raw_valid, best_valid;
  logic [N-1:0] raw_vis, best_state;
  logic signed [LP_W-1:0] best_logprob;

  rbm_top #(.NV(N), .NH(N), .SEED(32'h2468_ACE1)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_raw = 0, n_upd = 0, n_excl = 0, n_drop = 0, n_acc0 = 0, n_acc1 = 0, n_sat = 0;

  int J [N][N];        // Ising couplings (symmetric, zero diagonal)
  int Wq [N][N];       // stored weights
  int Bv [N], Bh [N];  // stored biases

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (dut.u_hitting.load[0]) n_acc0++;
    if (dut.u_hitting.load[1]) n_acc1++;
    if (dut.u_hitting.update) n_upd++;
    if (dut.u_hitting.excluded) n_excl++;
    for (int j = 0; j < N; j++)
      if (dut.step && (dut.u_sampler.hid_preact[j] >= 64 || dut.u_sampler.hid_preact[j] <= -64)) n_sat++;
  end

  // ---------------------------------------------------------------- problem setup
  task automatic make_maxcut();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) J[i][j] = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if ($urandom_range(0, 1) == 1) begin J[i][j] = 1; J[j][i] = 1; end
  endtask
  task automatic make_sk();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) J[i][j] = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin
        J[i][j] = ($urandom_range(0, 1) == 1) ? 1 : -1; J[j][i] = J[i][j];
      end
  endtask
  // Embed with coupling C: K = -J off the diagonal, C on it.
  task automatic embed(int C);
    for (int i = 0; i < N; i++) begin
      int rs;
      rs = 0;
      for (int j = 0; j < N; j++) begin
        Wq[i][j] = (i == j) ? 4 * C : -4 * J[i][j];
        rs += (i == j) ? C : -J[i][j];
      end
      Bv[i] = -2 * rs;
      Bh[i] = -2 * rs;  // K is symmetric
    end
  endtask
  task automatic write(param_sel_e s, int r, int c, int d);
    @(negedge clk);
    wr_en = 1; wr_sel = s; wr_row = 3'(r); wr_col = 3'(c); wr_data = weight_t'(d);
    @(negedge clk);
    wr_en = 0;
  endtask
  task automatic load_params();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) write(SEL_WEIGHT, i, j, Wq[i][j]);
    for (int i = 0; i < N; i++) write(SEL_VIS_BIAS, i, 0, Bv[i]);
    for (int j = 0; j < N; j++) write(SEL_HID_BIAS, 0, j, Bh[j]);
  endtask

  // ---------------------------------------------------------------- reference math
  function automatic longint logprob(logic [N-1:0] v);
    longint s;
    s = 0;
    for (int i = 0; i < N; i++) if (v[i]) s += Bv[i];
    for (int j = 0; j < N; j++) begin
      longint x;
      x = Bh[j];
      for (int i = 0; i < N; i++) if (v[i]) x += Wq[i][j];
      s += relu(x);
    end
    return s;
  endfunction
  function automatic int ising_energy(logic [N-1:0] v);  // sum_{i<j} J s_i s_j
    int e;
    e = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) e += J[i][j] * (v[i] == v[j] ? 1 : -1);
    return e;
  endfunction
  function automatic int ground_energy();
    int best;
    best = 1 << 30;
    for (int m = 0; m < (1 << N); m++) if (ising_energy(N'(m)) < best) best = ising_energy(N'(m));
    return best;
  endfunction

  // ---------------------------------------------------------------- one run
  task automatic run(out_mode_e mode, bit excl, int ns, bit try_write,
                     output logic [N-1:0] best_v, output longint best_lp_model, output bit found);
    int cycles, samples;
    bit seen;
    @(negedge clk);
    out_mode = mode; zero_excl_en = excl; num_samples = 32'(ns); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1; samples = 0; found = 0; best_lp_model = 0; best_v = '0;
    while (!done && cycles < ns + 100) begin
      if (dut.step) begin
        logic [N-1:0] v;
        longint lp;
        v = dut.u_sampler.vis_state;
        lp = logprob(v);
        samples++;
        if (!(excl && (v == '0 || v == '1)) && (!found || lp > best_lp_model)) begin
          found = 1; best_lp_model = lp; best_v = v;
        end
        if (mode == MODE_RAW) begin
          checks++;
          if (!raw_valid || raw_vis !== v) begin failures++; $display("raw stream mismatch"); end
          n_raw++;
        end
      end else if (raw_valid) begin
        failures++; $display("raw_valid outside a step");
      end
      if (try_write && cycles == 5) begin
        wr_en = 1; wr_sel = SEL_WEIGHT; wr_row = 0; wr_col = 0; wr_data = 9'sd99;
      end else wr_en = 0;
      @(negedge clk);
      cycles++;
    end
    wr_en = 0;
    checks++;
    if (samples != ns) begin failures++; $display("samples %0d expected %0d", samples, ns); end
    // start clock + init + N_s steps + drain (1 clock raw, 4 clocks hitting)
    checks++;
    if (cycles != ns + ((mode == MODE_RAW) ? 3 : 6)) begin
      failures++; $display("run took %0d clocks for N_s=%0d", cycles, ns);
    end
    if (try_write) begin
      checks++;
      if (dut.weights[0][0] != weight_t'(Wq[0][0])) begin failures++; $display("write during run was taken"); end
      else n_drop++;
    end
  endtask

  task automatic check_hitting(logic [N-1:0] mv, longint mlp, bit mfound);
    checks++;
    if (best_valid !== mfound || (mfound && (longint'(best_logprob) != mlp || logprob(best_state) != mlp))) begin
      failures++; $display("hitting result %b lp=%0d valid=%b, model best lp=%0d", best_state, best_logprob, best_valid, mlp);
    end
  endtask

  initial begin
    logic [N-1:0] mv;
    longint mlp;
    bit mfound;
    int e0;
    int c_maxcut;
    if (!$value$plusargs("C=%d", c_maxcut)) c_maxcut = 2;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- MAX-CUT, C = 12
    make_maxcut();
    embed(c_maxcut);
    load_params();
    e0 = ground_energy();
    run(MODE_RAW, 0, 300, 1, mv, mlp, mfound);
    run(MODE_HITTING, 1, 2000, 0, mv, mlp, mfound);
    check_hitting(mv, mlp, mfound);
    checks++;
    if (ising_energy(best_state) != e0) begin
      failures++; $display("MAX-CUT: best energy %0d, ground %0d", ising_energy(best_state), e0);
    end
    run(MODE_HITTING, 0, 500, 0, mv, mlp, mfound);
    check_hitting(mv, mlp, mfound);

    // ---- SK, C = 1
    make_sk();
    embed(1);
    load_params();
    e0 = ground_energy();
    run(MODE_HITTING, 0, 2000, 0, mv, mlp, mfound);
    check_hitting(mv, mlp, mfound);
    checks++;
    if (ising_energy(best_state) != e0) begin
      failures++; $display("SK: best energy %0d, ground %0d", ising_energy(best_state), e0);
    end

    $display("mechanisms: raw=%0d updates=%0d excluded=%0d dropped_writes=%0d acc0=%0d acc1=%0d saturated=%0d",
             n_raw, n_upd, n_excl, n_drop, n_acc0, n_acc1, n_sat);
    checks++;
    if (n_raw == 0 || n_upd == 0 || n_excl == 0 || n_drop == 0 || n_acc0 == 0 || n_acc1 == 0) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

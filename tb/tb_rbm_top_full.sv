// tb_rbm_top_full: one complete operation of rbm_top at its default size, 200 x 200.
//
// Builds a 200-node dense MAX-CUT instance (edge probability 0.5), embeds it with
// coupling C = 12 and beta = 0.25 (stored weights -4 per edge, 48 on the diagonal,
// biases 2 * (degree - C)), loads all 40,400 parameters through the write port, and
// runs the sampler in hitting-time mode with zero-cut exclusion for NS samples.
// Every sample's log-probability is recomputed here from the probed visible state;
// the engine's result must equal the best of them, the run must take NS + 6 clocks
// (one sample per clock), and the cut of the reported state must beat the average
// random cut |E|/2 by more than N edges (a random 200-node graph of this density has
// a maximum cut near |E|/2 + 540). A short raw-mode run checks the sample stream.
module tb_rbm_top_full;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned N  = DEFAULT_N;
  localparam int          C  = 12;
  localparam int          NS = 70000;
  localparam int unsigned LP_W = logprob_width(N, N);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  param_sel_e wr_sel = SEL_WEIGHT;
  logic [7:0] wr_row = '0, wr_col = '0;
  weight_t wr_data = '0;
  logic start = 0;
  logic [31:0] num_samples = '0;
  out_mode_e out_mode = MODE_RAW;
  logic zero_excl_en = 0;
  logic busy, done, raw_valid, best_valid;
  logic [N-1:0] raw_vis, best_state;
  logic signed [LP_W-1:0] best_logprob;

  rbm_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_upd = 0, n_excl_cand = 0;
  bit A [N][N];
  int Wq [N][N];
  int Bv [N];
  int edges = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (dut.u_hitting.update) n_upd++;

  function automatic longint logprob(logic [N-1:0] v);
    longint s;
    s = 0;
    for (int i = 0; i < N; i++) if (v[i]) s += Bv[i];
    for (int j = 0; j < N; j++) begin
      longint x;
      x = Bv[j];  // hidden biases equal the visible ones (symmetric embedding)
      for (int i = 0; i < N; i++) if (v[i]) x += Wq[i][j];
      s += relu(x);
    end
    return s;
  endfunction
  function automatic int cut(logic [N-1:0] v);
    int c;
    c = 0;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) if (A[i][j] && v[i] != v[j]) c++;
    return c;
  endfunction

  initial begin
    int cycles, samples;
    bit found;
    longint best_lp;
    logic [N-1:0] best_v;
    // problem and embedding
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) A[i][j] = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if ($urandom_range(0, 1) == 1) begin A[i][j] = 1; A[j][i] = 1; edges++; end
    for (int i = 0; i < N; i++) begin
      int deg;
      deg = 0;
      for (int j = 0; j < N; j++) begin
        Wq[i][j] = (i == j) ? 4 * C : (A[i][j] ? -4 : 0);
        deg += int'(A[i][j]);
      end
      Bv[i] = 2 * (deg - C);
      checks++;
      if (Bv[i] > 255 || Bv[i] < -256) begin failures++; $display("bias %0d does not fit 9 bits", Bv[i]); end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // load all parameters, one write per clock
    @(negedge clk);
    wr_en = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        wr_sel = SEL_WEIGHT; wr_row = 8'(i); wr_col = 8'(j); wr_data = weight_t'(Wq[i][j]);
        @(negedge clk);
      end
    for (int i = 0; i < N; i++) begin
      wr_sel = SEL_VIS_BIAS; wr_row = 8'(i); wr_data = weight_t'(Bv[i]); @(negedge clk);
      wr_sel = SEL_HID_BIAS; wr_col = 8'(i); wr_data = weight_t'(Bv[i]); @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (dut.vis_bias[i] != weight_t'(Bv[i]) || dut.hid_bias[i] != weight_t'(Bv[i]) ||
          dut.weights[i][(i * 7) % N] != weight_t'(Wq[i][(i * 7) % N])) failures++;
    end

    // short raw-mode run
    @(negedge clk);
    out_mode = MODE_RAW; num_samples = 50; start = 1;
    @(negedge clk);
    start = 0; samples = 0;
    while (!done) begin
      if (raw_valid) begin
        samples++;
        checks++;
        if (raw_vis !== dut.u_sampler.vis_state) failures++;
      end
      @(negedge clk);
    end
    checks++;
    if (samples != 50) begin failures++; $display("raw samples %0d", samples); end

    // hitting-time run
    @(negedge clk);
    out_mode = MODE_HITTING; zero_excl_en = 1; num_samples = NS; start = 1;
    @(negedge clk);
    start = 0; cycles = 1; samples = 0; found = 0; best_lp = 0; best_v = '0;
    while (!done && cycles < NS + 100) begin
      if (dut.step) begin
        logic [N-1:0] v;
        longint lp;
        v = dut.u_sampler.vis_state;
        samples++;
        if (v == '0 || v == '1) n_excl_cand++;
        else begin
          lp = logprob(v);
          if (!found || lp > best_lp) begin found = 1; best_lp = lp; best_v = v; end
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
    checks++;
    if (cut(best_state) <= edges / 2 + N) begin failures++; $display("cut %0d of %0d edges", cut(best_state), edges); end
    checks++;
    if (n_upd == 0) failures++;
    $display("N=%0d edges=%0d best cut=%0d after %0d samples, %0d best-state updates, %0d zero-cut samples",
             N, edges, cut(best_state), NS, n_upd, n_excl_cand);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

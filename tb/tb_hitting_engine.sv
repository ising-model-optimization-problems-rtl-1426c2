// tb_hitting_engine: checks the best-state tracking of the hitting time engine.
// Random visible states (some all-0 / all-1) and hidden pre-activations are offered on
// most clocks. The testbench computes each sample's log-probability itself, keeps its
// own best state (strictly greater wins, zero-cut states skipped when enabled) and
// compares with the engine four clocks after each sample (the engine's latency). It
// also checks the update / excluded pulses, idle, clear, and that both accumulators
// take samples.
module tb_hitting_engine;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned NV = 6, NH = 5;
  localparam int unsigned ACC_HW = preact_width(NV);
  localparam int unsigned LP_W = logprob_width(NV, NH);
  logic clk = 0, rst_n = 0, clear = 0, zero_excl_en = 0, sample_valid = 0;
  logic [NV-1:0] vis_state = '0;
  logic signed [ACC_HW-1:0] hid_preact [NH];
  weight_t vis_bias [NV];
  logic best_found, update, excluded, idle;
  logic [NV-1:0] best_state;
  logic signed [LP_W-1:0] best_logprob;
  int checks = 0, failures = 0, n_upd = 0, n_excl = 0, n_acc0 = 0, n_acc1 = 0;
  int cyc = 0;

  hitting_engine #(.NV(NV), .NH(NH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) begin
    if (dut.load[0]) n_acc0++;
    if (dut.load[1]) n_acc1++;
  end

  // model
  bit            s_valid [int];
  longint        s_lp    [int];
  logic [NV-1:0] s_v     [int];
  bit            s_excl  [int];
  bit            m_found = 0;
  longint        m_lp = 0;
  logic [NV-1:0] m_v = '0;
  bit            m_upd [int];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && !clear) begin
    // the best registers hold every sample up to clock cyc-4
    checks++;
    if (best_found !== m_found || (m_found && (best_state !== m_v || longint'(best_logprob) != m_lp))) begin
      failures++; $display("cycle %0d: best %b %0d found=%b, model %b %0d found=%b", cyc, best_state, best_logprob, best_found, m_v, m_lp, m_found);
    end
    // pulses of this clock belong to the sample of clock cyc-3
    if (s_valid.exists(cyc - 3)) begin
      int k;
      bit u;
      k = cyc - 3;
      u = !s_excl[k] && (!m_found || s_lp[k] > m_lp);
      checks++;
      if (excluded !== s_excl[k] || update !== u) begin
        failures++; $display("cycle %0d: pulses upd=%b excl=%b expected %b %b", cyc, update, excluded, u, s_excl[k]);
      end
      if (u) begin m_found = 1; m_lp = s_lp[k]; m_v = s_v[k]; n_upd++; end
      if (s_excl[k]) n_excl++;
      s_valid.delete(k);
    end else begin
      checks++;
      if (update || excluded) begin failures++; $display("cycle %0d: spurious pulse", cyc); end
    end
  end

  task automatic offer(int n, int rate);
    for (int c = 0; c < n; c++) begin
      @(negedge clk);
      #2;
      sample_valid = ($urandom_range(0, 99) < rate);
      case ($urandom_range(0, 9))
        0: vis_state = '0;
        1: vis_state = '1;
        default: vis_state = NV'($urandom);
      endcase
      for (int j = 0; j < NH; j++) hid_preact[j] = ACC_HW'($urandom_range(0, 200)) - ACC_HW'(100);
      if (sample_valid) begin
        longint s;
        s = 0;
        for (int i = 0; i < NV; i++) if (vis_state[i]) s += longint'(vis_bias[i]);
        for (int j = 0; j < NH; j++) s += relu(longint'(hid_preact[j]));
        s_valid[cyc] = 1; s_lp[cyc] = s; s_v[cyc] = vis_state;
        s_excl[cyc] = zero_excl_en && (vis_state == '0 || vis_state == '1);
      end
    end
    @(negedge clk); #2 sample_valid = 0;
  endtask

  initial begin
    for (int i = 0; i < NV; i++) vis_bias[i] = weight_t'($urandom_range(0, 40)) - 9'sd20;
    for (int j = 0; j < NH; j++) hid_preact[j] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    zero_excl_en = 1;
    offer(800, 90);
    repeat (5) @(negedge clk);
    checks++; if (!idle) begin failures++; $display("not idle after drain"); end
    // clear forgets the best state
    @(negedge clk); #2 clear = 1;
    @(negedge clk); #2 clear = 0; m_found = 0; m_lp = 0; m_v = '0;
    checks++; if (best_found) failures++;
    // larger biases make all-1 states strong; without exclusion they may win
    for (int i = 0; i < NV; i++) vis_bias[i] = 9'sd60;
    zero_excl_en = 0;
    offer(800, 100);
    repeat (5) @(negedge clk);
    checks++;
    if (n_upd < 3 || n_excl == 0 || n_acc0 < 100 || n_acc1 < 100) begin
      failures++; $display("coverage: upd=%0d excl=%0d acc0=%0d acc1=%0d", n_upd, n_excl, n_acc0, n_acc1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

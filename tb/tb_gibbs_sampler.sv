// tb_gibbs_sampler: checks the block Gibbs update on a 4 x 3 RBM.
// Before each clock the testbench reads the random numbers the sampler's generators
// offer (hierarchical reference) and predicts, with its own model, the next visible
// state from the current hidden state and the next hidden state from the current
// visible state. It checks the prediction after the clock, that step = 0 holds the
// state, that init loads the random bits, and the hidden pre-activations offered to
// the hitting engine. It also checks that steps happen one per clock.
module tb_gibbs_sampler;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned NV = 4, NH = 3;
  localparam int unsigned ACC_HW = preact_width(NV);
  logic clk = 0, rst_n = 0, init = 0, step = 0;
  weight_t weights [NV][NH];
  weight_t vis_bias [NV];
  weight_t hid_bias [NH];
  logic [NV-1:0] vis_state;
  logic [NH-1:0] hid_state;
  logic signed [ACC_HW-1:0] hid_preact [NH];
  int checks = 0, failures = 0, steps = 0, holds = 0;

  gibbs_sampler #(.NV(NV), .NH(NH), .SEED(32'h0BAD_5EED)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint hid_sum(int j, logic [NV-1:0] v);
    longint s = longint'(hid_bias[j]);
    for (int i = 0; i < NV; i++) if (v[i]) s += longint'(weights[i][j]);
    return s;
  endfunction
  function automatic longint vis_sum(int i, logic [NH-1:0] h);
    longint s = longint'(vis_bias[i]);
    for (int j = 0; j < NH; j++) if (h[j]) s += longint'(weights[i][j]);
    return s;
  endfunction

  initial begin
    logic [NV-1:0] ev;
    logic [NH-1:0] eh;
    bit near_v [NV];
    bit near_h [NH];
    for (int i = 0; i < NV; i++) begin
      vis_bias[i] = weight_t'($urandom_range(0, 12)) - 9'sd6;
      for (int j = 0; j < NH; j++) weights[i][j] = weight_t'($urandom_range(0, 16)) - 9'sd8;
    end
    for (int j = 0; j < NH; j++) hid_bias[j] = weight_t'($urandom_range(0, 12)) - 9'sd6;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // init: load random bits
    @(negedge clk);
    init = 1;
    for (int i = 0; i < NV; i++) ev[i] = dut.rnd_vis[i][PROB_W-1];
    for (int j = 0; j < NH; j++) eh[j] = dut.rnd_hid[j][PROB_W-1];
    @(negedge clk);
    init = 0;
    checks++;
    if (vis_state !== ev || hid_state !== eh) begin failures++; $display("init state wrong"); end
    for (int c = 0; c < 3000; c++) begin
      step = ($urandom_range(0, 9) != 0);
      for (int j = 0; j < NH; j++) begin
        checks++;
        if (longint'(hid_preact[j]) != hid_sum(j, vis_state)) begin
          failures++; $display("hid_preact[%0d]=%0d exp %0d", j, hid_preact[j], hid_sum(j, vis_state));
        end
      end
      for (int i = 0; i < NV; i++) near_v[i] = 0;
      for (int j = 0; j < NH; j++) near_h[j] = 0;
      if (step) begin
        for (int i = 0; i < NV; i++) begin
          real d;
          d = real'(dut.rnd_vis[i]) - sig_real(vis_sum(i, hid_state));
          near_v[i] = (d < 1.5 && d > -1.5);
        end
        for (int j = 0; j < NH; j++) begin
          real d;
          d = real'(dut.rnd_hid[j]) - sig_real(hid_sum(j, vis_state));
          near_h[j] = (d < 1.5 && d > -1.5);
        end
        for (int i = 0; i < NV; i++) ev[i] = (real'(dut.rnd_vis[i]) < sig_real(vis_sum(i, hid_state)));
        for (int j = 0; j < NH; j++) eh[j] = (real'(dut.rnd_hid[j]) < sig_real(hid_sum(j, vis_state)));
        steps++;
      end else begin
        ev = vis_state; eh = hid_state; holds++;
      end
      @(negedge clk);
      checks++;
      if (vis_state !== ev || hid_state !== eh) begin
        // accept a difference only where the random number sat within 1.5 LSB of p
        for (int i = 0; i < NV; i++) if (vis_state[i] != ev[i] && near_v[i]) ev[i] = vis_state[i];
        for (int j = 0; j < NH; j++) if (hid_state[j] != eh[j] && near_h[j]) eh[j] = hid_state[j];
      end
      if (vis_state !== ev || hid_state !== eh) begin
        failures++; $display("cycle %0d: v=%b h=%b expected v=%b h=%b", c, vis_state, hid_state, ev, eh);
      end
    end
    checks++;
    if (steps == 0 || holds == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

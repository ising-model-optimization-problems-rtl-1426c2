// tb_stochastic_neuron: random test of one neuron with 16 inputs.
// Each trial drives random weights, bias, input state and random number, and compares
// the pre-activation (sum of selected weights plus bias), the probability (within
// one LSB of the exact sigmoid) and the fire decision with values computed here. Weights are sometimes
// forced to extremes to reach both saturated regions of the sigmoid; both counted.
module tb_stochastic_neuron;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned N_IN = 16;
  localparam int unsigned ACC_W = preact_width(N_IN);
  logic [N_IN-1:0] state_in;
  weight_t weights [N_IN];
  weight_t bias;
  logic [PROB_W-1:0] rnd;
  logic signed [ACC_W-1:0] preact;
  logic [PROB_W:0] prob;
  logic fire;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0, fires = 0;

  stochastic_neuron #(.N_IN(N_IN)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint sum;
      int mode;
      mode = t % 3;
      state_in = N_IN'($urandom);
      bias = weight_t'($urandom);
      for (int k = 0; k < N_IN; k++) begin
        if (mode == 0) weights[k] = weight_t'($urandom);
        else if (mode == 1) weights[k] = weight_t'($urandom_range(0, 7)) - 9'sd4; // small
        else weights[k] = ($urandom_range(0, 1) == 1) ? 9'sd255 : -9'sd256;
      end
      rnd = PROB_W'($urandom);
      #1;
      sum = longint'(bias);
      for (int k = 0; k < N_IN; k++) if (state_in[k]) sum += longint'(weights[k]);
      checks++;
      if (longint'(preact) != sum) begin failures++; $display("preact %0d expected %0d", preact, sum); end
      checks++;
      if (real'(prob) > sig_real(sum) + 1.0 || real'(prob) < sig_real(sum) - 1.0) begin
        failures++; $display("prob %0d expected %f (x=%0d)", prob, sig_real(sum), sum);
      end
      checks++;
      if (!fire_ok(sum, int'(rnd), fire)) begin failures++; $display("fire %0d wrong", fire); end
      if (prob == 17'd65536) sat_hi++;
      if (prob == 17'd0) sat_lo++;
      fires += int'(fire);
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0 || fires == 0) begin failures++; $display("coverage: sat_hi=%0d sat_lo=%0d fires=%0d", sat_hi, sat_lo, fires); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rbm_layer: random test of a 3-neuron layer with 5 inputs.
// Checks every neuron's pre-activation and sample against the reference model, so a
// wrong row of weights, bias or random number in any neuron is caught.
module tb_rbm_layer;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned N_OUT = 3, N_IN = 5;
  localparam int unsigned ACC_W = preact_width(N_IN);
  logic [N_IN-1:0] state_in;
  weight_t weights [N_OUT][N_IN];
  weight_t bias [N_OUT];
  logic [PROB_W-1:0] rnd [N_OUT];
  logic signed [ACC_W-1:0] preact [N_OUT];
  logic [N_OUT-1:0] fire;
  int checks = 0, failures = 0;

  rbm_layer #(.N_OUT(N_OUT), .N_IN(N_IN)) dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      state_in = N_IN'($urandom);
      for (int o = 0; o < N_OUT; o++) begin
        bias[o] = weight_t'($urandom_range(0, 40)) - 9'sd20;
        rnd[o] = PROB_W'($urandom);
        for (int k = 0; k < N_IN; k++) weights[o][k] = weight_t'($urandom_range(0, 16)) - 9'sd8;
      end
      #1;
      for (int o = 0; o < N_OUT; o++) begin
        longint sum;
        sum = longint'(bias[o]);
        for (int k = 0; k < N_IN; k++) if (state_in[k]) sum += longint'(weights[o][k]);
        checks++;
        if (longint'(preact[o]) != sum) begin failures++; $display("neuron %0d preact %0d exp %0d", o, preact[o], sum); end
        checks++;
        if (!fire_ok(sum, int'(rnd[o]), fire[o])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

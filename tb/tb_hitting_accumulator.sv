// tb_hitting_accumulator: checks one two-cycle log-probability accumulator.
// Random samples are loaded back to back every other clock and at random gaps; each
// result must appear in the third clock after its load clock with
//   logprob = sum_i b_v[i] v[i] + sum_j max(x_h[j], 0)
// computed here, and with the loaded visible state.
module tb_hitting_accumulator;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned NV = 6, NH = 5;
  localparam int unsigned ACC_HW = preact_width(NV);
  localparam int unsigned LP_W = logprob_width(NV, NH);
  logic clk = 0, rst_n = 0, load = 0;
  logic [NV-1:0] vis_in;
  logic signed [ACC_HW-1:0] hid_preact_in [NH];
  weight_t vis_bias [NV];
  logic busy, valid;
  logic [NV-1:0] vis_out;
  logic signed [LP_W-1:0] logprob;
  int checks = 0, failures = 0, loads = 0, back_to_back = 0;
  longint exp_lp [int];
  logic [NV-1:0] exp_v [int];
  int cyc = 0;

  hitting_accumulator #(.NV(NV), .NH(NH)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result check: load high in clock t: valid high in clock t+3
  always @(negedge clk) if (rst_n) begin
    if (valid) begin
      checks++;
      if (!exp_lp.exists(cyc - 3)) begin failures++; $display("unexpected valid at %0d", cyc); end
      else if (longint'(logprob) != exp_lp[cyc - 3] || vis_out !== exp_v[cyc - 3]) begin
        failures++; $display("cycle %0d: logprob %0d exp %0d", cyc, logprob, exp_lp[cyc - 3]);
      end
      else exp_lp.delete(cyc - 3);
    end
  end

  initial begin
    bit last_load;
    for (int i = 0; i < NV; i++) vis_bias[i] = weight_t'($urandom);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    last_load = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      #1;
      // never load in the clock right after a load
      load = !last_load && ((c < 600) || ($urandom_range(0, 2) == 0));
      vis_in = NV'($urandom);
      for (int j = 0; j < NH; j++) hid_preact_in[j] = ACC_HW'($urandom);
      if (load) begin
        longint s;
        s = 0;
        for (int i = 0; i < NV; i++) if (vis_in[i]) s += longint'(vis_bias[i]);
        for (int j = 0; j < NH; j++) s += relu(longint'(hid_preact_in[j]));
        exp_lp[cyc] = s;
        exp_v[cyc] = vis_in;
        loads++;
        if (busy) back_to_back++;
      end
      last_load = load;
    end
    @(negedge clk); load = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (exp_lp.num() != 0) begin failures++; $display("%0d results missing", exp_lp.num()); end
    checks++;
    if (back_to_back == 0 || loads < 500) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sigmoid_approx: exhaustive test of the fixed-point sigmoid.
// For every 10-bit input (x from -128 to 127.75 in steps of 0.25) the output must be
// within one LSB of 65536 / (1 + e^-x) computed here in real arithmetic. Also checks
// monotonicity, exact symmetry p(x) + p(-x) = 1, and that the tails are kept:
// p(6) and p(10) must still be below 1 (saturation only for |x| >= 16).
module tb_sigmoid_approx;
  import rbm_pkg::*;
  import rbm_model_pkg::*;
  localparam int unsigned IN_W = 10;
  logic signed [IN_W-1:0] x;
  logic [PROB_W:0] p;
  int checks = 0, failures = 0;
  sigmoid_approx #(.IN_W(IN_W)) dut (.x, .p);

  initial begin
    int prev;
    int pos [int];
    prev = -1;
    for (int k = -(1 << (IN_W-1)); k < (1 << (IN_W-1)); k++) begin
      real e;
      x = IN_W'(k);
      #1;
      e = sig_real(k);
      checks++;
      if (real'(p) > e + 1.0 || real'(p) < e - 1.0) begin failures++; $display("x=%0d/4 p=%0d expected %f", k, p, e); end
      checks++;
      if (int'(p) < prev) begin failures++; $display("not monotonic at x=%0d/4", k); end
      prev = int'(p);
      pos[k] = int'(p);
    end
    for (int k = 1; k < (1 << (IN_W-1)); k++) begin
      checks++;
      if (pos[k] + pos[-k] != 65536) begin failures++; $display("asymmetric at %0d", k); end
    end
    checks++;
    if (pos[24] >= 65536 || pos[40] >= 65536 || pos[-40] == 0 || pos[64] != 65536) begin
      failures++; $display("tails: p(6)=%0d p(10)=%0d p(-10)=%0d p(16)=%0d", pos[24], pos[40], pos[-40], pos[64]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rng_bank: checks the per-lane xorshift generators.
// Every clock each lane's state must be the xorshift32 successor of its previous
// state (model written here), its output the top 16 bits, states never zero, lanes
// different from each other, and the outputs roughly uniform (mean and per-bit
// frequency over 4000 clocks).
module tb_rng_bank;
  import rbm_pkg::*;
  localparam int unsigned N = 6;
  logic clk = 0, rst_n = 0;
  logic [PROB_W-1:0] rnd [N];
  int checks = 0, failures = 0;
  rng_bank #(.N(N), .SEED(32'hCAFE_F00D)) dut (.clk, .rst_n, .rnd);
  always #5 clk = ~clk;

  function automatic logic [31:0] model_next(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13); y = y ^ (y >> 17); y = y ^ (y << 5);
    return y;
  endfunction

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] prev [N];
    real sum [N];
    int ones [N][PROB_W];
    for (int i = 0; i < N; i++) begin sum[i] = 0; for (int b = 0; b < PROB_W; b++) ones[i][b] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < N; i++) prev[i] = dut.state[i];
    for (int i = 0; i < N; i++)
      for (int k = i + 1; k < N; k++) begin checks++; if (prev[i] == prev[k]) failures++; end
    for (int c = 0; c < 4000; c++) begin
      @(posedge clk); #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (dut.state[i] !== model_next(prev[i]) || dut.state[i] == 0) begin
          failures++; $display("lane %0d state %h expected %h", i, dut.state[i], model_next(prev[i]));
        end
        checks++;
        if (rnd[i] !== dut.state[i][31:16]) failures++;
        prev[i] = dut.state[i];
        sum[i] += real'(rnd[i]);
        for (int b = 0; b < PROB_W; b++) ones[i][b] += int'(rnd[i][b]);
      end
    end
    for (int i = 0; i < N; i++) begin
      real m;
      m = sum[i] / 4000.0;
      checks++;
      if (m < 31168.0 || m > 34368.0) begin failures++; $display("lane %0d mean %f", i, m); end
      for (int b = 0; b < PROB_W; b++) begin
        checks++;
        if (ones[i][b] < 1800 || ones[i][b] > 2200) begin failures++; $display("lane %0d bit %0d ones %0d", i, b, ones[i][b]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

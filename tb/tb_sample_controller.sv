// tb_sample_controller: checks the run sequencing.
// For several run lengths (including 0 and 1) it checks: one init clock right after
// start, step high for exactly num_samples consecutive clocks, busy during the run,
// done only after the engine reports idle (held low for a random number of clocks),
// and that start is ignored while busy.
module tb_sample_controller;
  logic clk = 0, rst_n = 0, start = 0, engine_idle = 1;
  logic [31:0] num_samples = '0;
  logic init, step, busy, done;
  int checks = 0, failures = 0;

  sample_controller dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n, int drain);
    int steps, inits, first_step, last_step, c, done_at;
    @(negedge clk);
    start = 1; num_samples = 32'(n);
    @(negedge clk);
    start = 0; num_samples = 32'hFFFF_FFFF;  // must have been latched
    steps = 0; inits = 0; first_step = -1; last_step = -1; c = 0; done_at = -1;
    engine_idle = 0;
    while (!done && c < n + drain + 20) begin
      if (init) inits++;
      if (step) begin steps++; if (first_step < 0) first_step = c; last_step = c; end
      checks++;
      if (!busy) begin failures++; $display("not busy at %0d", c); end
      if (c == 3) begin  // a second start during the run is ignored
        start = 1;
      end else start = 0;
      engine_idle = (c >= n + drain);
      @(negedge clk);
      c++;
    end
    start = 0;
    engine_idle = 1;
    checks++;
    if (steps != n || inits != 1) begin failures++; $display("n=%0d steps=%0d inits=%0d", n, steps, inits); end
    checks++;
    if (n > 0 && (first_step != 1 || last_step != n)) begin failures++; $display("step window %0d..%0d", first_step, last_step); end
    checks++;
    if (c < n + drain + 1) begin failures++; $display("done before engine idle: c=%0d", c); end
    checks++;
    if (!done || busy) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (busy || done || step || init) failures++;
    run(7, 3);
    run(0, 0);
    run(1, 5);
    run(100, 0);
    run(33, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

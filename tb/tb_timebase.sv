// tb_timebase: checks that neuron_tick comes every NEURON_CLK_DIV clocks and
// step_tick every N neuron ticks while running (each period is one check),
// that nothing ticks while stopped or in reset, and that the counters restart
// when run is raised again or after a reset in mid-run. Uses
// NEURON_CLK_DIV = 10, N = 7 to keep the run short; the periods are checked
// as cycle counts.
module tb_timebase;
  localparam int DIV = 10, N = 7;
  logic clk = 0, rst_n = 0, run = 0, neuron_tick, step_tick;
  int checks = 0, failures = 0;

  timebase #(.NEURON_CLK_DIV(DIV), .N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, last_n = -1, last_s = -1, n_ticks = 0, s_ticks = 0, bad = 0;
  int n_since = 0;
  always @(negedge clk) begin
    cyc++;
    if (neuron_tick) begin
      n_ticks++;
      n_since++;
      if (last_n >= 0) begin
        checks++;
        if (cyc - last_n != DIV) begin bad++; $display("neuron period %0d", cyc - last_n); end
      end
      last_n = cyc;
    end
    if (step_tick) begin
      s_ticks++;
      checks++;
      if (!neuron_tick) begin bad++; $display("step tick without neuron tick"); end
      if (last_s >= 0) begin
        checks += 2;
        if (cyc - last_s != DIV * N) begin bad++; $display("step period %0d", cyc - last_s); end
        if (n_since != N) begin bad++; $display("%0d neuron ticks in a step", n_since); end
      end
      last_s = cyc;
      n_since = 0;
    end
    if ((!run || !rst_n) && (neuron_tick || step_tick)) begin
      bad++; $display("tick while stopped or in reset");
    end
  end

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (50) @(negedge clk);
    checks++; if (n_ticks != 0) begin failures++; $display("ticks while stopped"); end
    run = 1; t0 = cyc;
    wait (step_tick); @(negedge clk);
    checks++;
    if (cyc - t0 != DIV * N) begin failures++; $display("first step after %0d", cyc - t0); end
    while (s_ticks < 6) @(negedge clk);
    checks++; if (n_ticks != 6 * N) begin failures++; $display("neuron ticks %0d", n_ticks); end
    checks++; if (bad != 0) begin failures += bad; bad = 0; end
    run = 0;
    repeat (3 * DIV) @(negedge clk);
    last_n = -1; last_s = -1;
    n_ticks = 0;
    run = 1; t0 = cyc;
    wait (neuron_tick); @(negedge clk);
    checks++; if (cyc - t0 != DIV) begin failures++; $display("restart after %0d", cyc - t0); end
    wait (step_tick); @(negedge clk);
    checks++; if (cyc - t0 != DIV * N) begin failures++; $display("restart step after %0d", cyc - t0); end
    // reset in the middle of a step: the next step comes a full period after release
    repeat (3 * DIV + 4) @(negedge clk);
    rst_n = 0;
    repeat (2 * DIV) @(negedge clk);
    last_n = -1; last_s = -1; n_ticks = 0; s_ticks = 0;
    rst_n = 1; t0 = cyc;
    wait (neuron_tick); @(negedge clk);
    checks++; if (cyc - t0 != DIV) begin failures++; $display("after reset neuron tick at %0d", cyc - t0); end
    wait (step_tick); @(negedge clk);
    checks++; if (cyc - t0 != DIV * N) begin failures++; $display("after reset step at %0d", cyc - t0); end
    while (s_ticks < 3) @(negedge clk);
    checks++; if (bad != 0) begin failures += bad; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

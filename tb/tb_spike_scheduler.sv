// tb_spike_scheduler: a queue stands in for the input FIFO and holds random
// delta-coded spike words; the step counter advances while a consumer takes
// every offered spike. Checks that each spike is released in exactly the
// step given by the running sum of its time differences, in order, that
// several spikes with difference 0 come out in one step, that a spike found
// after its due step is flagged late, and that restart resets the base time.
module tb_spike_scheduler;
  import ncx_pkg::*;
  logic clk = 0, rst_n = 0, restart = 0, out_ready = 0;
  logic [31:0] t_now = 0;
  logic fifo_empty, fifo_pop, out_valid, late;
  spike_word_t fifo_head;
  logic [15:0] out_addr;
  int checks = 0, failures = 0;

  spike_word_t q [$];
  assign fifo_empty = (q.size() == 0);
  assign fifo_head  = fifo_empty ? '0 : q[0];

  spike_scheduler dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lates = 0;
  always @(negedge clk) if (late) lates++;

  initial begin
    int due [$];
    int abs_t, got_n;
    repeat (3) @(negedge clk);
    rst_n = 1;
    abs_t = 0;
    for (int i = 0; i < 200; i++) begin
      spike_word_t w;
      w.addr = 16'(i);
      w.dt   = ($urandom % 3 == 0) ? 8'd0 : 8'($urandom % 6);
      abs_t += w.dt;
      due.push_back(abs_t);
      q.push_back(w);
    end
    got_n = 0;
    // run steps; in each step take all offered spikes
    for (int t = 0; t <= abs_t + 2; t++) begin
      @(negedge clk); t_now = t;
      #1;
      while (out_valid) begin
        checks++;
        if (int'(out_addr) != got_n || due[got_n] != t) begin
          failures++; $display("spike %0d (due %0d) released at step %0d", out_addr, due[got_n], t);
        end
        out_ready = 1;
        @(posedge clk); #1 void'(q.pop_front());
        got_n++;
        @(negedge clk); out_ready = 0;
        #1;
      end
      repeat (2) @(negedge clk);
    end
    checks++; if (got_n != 200) begin failures++; $display("released %0d of 200", got_n); end
    checks++; if (lates != 0) begin failures++; $display("late flagged %0d times", lates); end
    // late spike: step counter already past its due step
    q.push_back('{addr: 16'd7, dt: 8'd1});
    @(negedge clk); t_now = abs_t + 5;
    #1;
    checks++; if (!out_valid) begin failures++; $display("late spike not offered"); end
    out_ready = 1; @(posedge clk); #1 void'(q.pop_front()); @(negedge clk); out_ready = 0;
    @(negedge clk);
    checks++; if (lates != 1) begin failures++; $display("late spike not flagged"); end
    // restart: base back to 0
    restart = 1; @(negedge clk); restart = 0;
    t_now = 2;
    q.push_back('{addr: 16'd9, dt: 8'd3});
    #1;
    checks++; if (out_valid) begin failures++; $display("spike due 3 offered at step 2"); end
    @(negedge clk); t_now = 3; #1;
    checks++; if (!out_valid || out_addr != 16'd9) begin failures++; $display("spike due 3 not offered"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

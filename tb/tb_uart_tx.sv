// tb_uart_tx: sends random bytes through the transmitter, decodes the line by
// sampling each bit in its middle, and checks the data, the start and stop
// bits and that one frame takes exactly 10 bit times (1 Mbit/s at 100 MHz).
module tb_uart_tx;
  localparam int CPB = 100;
  logic clk = 0, rst_n = 0, valid = 0, ready, tx;
  logic [7:0] data = 0;
  int checks = 0, failures = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .valid, .data, .ready, .tx);

  always #5 clk = ~clk;

  // cycle of acceptance and of the return to idle, seen at negative edges:
  // a frame of 10 bit times shows as 10 * CPB + 1 between the two
  int cyc = 0, t_acc = 0, t_end = 0;
  logic ready_d = 1;
  always @(negedge clk) begin
    cyc++;
    if (valid && ready) t_acc = cyc;
    if (ready && !ready_d) t_end = cyc;
    ready_d <= ready;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    checks++; if (tx !== 1'b1 || !ready) begin failures++; $display("idle line not high"); end
    for (int n = 0; n < 16; n++) begin
      logic [7:0] b;
      logic [7:0] r;
      b = 8'($urandom);
      @(negedge clk); valid = 1; data = b;
      @(negedge clk); valid = 0;
      // line is low (start bit) now; sample start bit in its middle
      repeat (CPB/2 - 1) @(negedge clk);
      checks++; if (tx !== 1'b0) begin failures++; $display("no start bit"); end
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(negedge clk);
        r[i] = tx;
      end
      repeat (CPB) @(negedge clk);
      checks++; if (tx !== 1'b1) begin failures++; $display("no stop bit"); end
      checks++; if (r !== b) begin failures++; $display("sent %h decoded %h", b, r); end
      while (!ready) @(negedge clk);
      @(negedge clk);
      checks++;
      if (t_end - t_acc != 10 * CPB + 1) begin failures++; $display("frame took %0d cycles", t_end - t_acc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

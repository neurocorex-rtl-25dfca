// tb_uart_rx: drives 8N1 frames into the receiver at CLKS_PER_BIT = 100 and
// checks every received byte, that a frame with a low stop bit is rejected
// with frame_err, and that the byte appears within one frame time. A second
// phase sends back-to-back frames (no idle time between the stop bit and the
// next start bit) from a sender whose bit time is 2 % short or long, and
// checks that a low glitch shorter than half a bit does not start a frame.
module tb_uart_rx;
  localparam int CPB = 100;
  logic clk = 0, rst_n = 0, rx = 1;
  logic valid, frame_err;
  logic [7:0] data;
  int checks = 0, failures = 0;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .rx, .valid, .data, .frame_err);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(input logic [7:0] b, input logic stop);
    rx = 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (CPB) @(posedge clk); end
    rx = stop; repeat (CPB) @(posedge clk);
    rx = 1; repeat (CPB) @(posedge clk);
  endtask

  // frame with bit time `bt` clocks and no idle time after the stop bit
  task automatic send_bt(input logic [7:0] b, input int bt);
    rx = 0; repeat (bt) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (bt) @(posedge clk); end
    rx = 1; repeat (bt) @(posedge clk);
  endtask

  logic [7:0] got [$];
  int errs = 0;
  always @(negedge clk) begin
    if (valid) got.push_back(data);
    if (frame_err) errs++;
  end

  initial begin
    logic [7:0] sent [$];
    repeat (10) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);
    for (int n = 0; n < 20; n++) begin
      logic [7:0] b;
      b = (n == 0) ? 8'h00 : (n == 1) ? 8'hFF : 8'($urandom);
      sent.push_back(b);
      send(b, 1'b1);
    end
    repeat (50) @(posedge clk);
    checks++;
    if (got.size() != sent.size()) begin
      failures++; $display("count mismatch %0d vs %0d", got.size(), sent.size());
    end
    for (int i = 0; i < sent.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] !== sent[i]) begin failures++; $display("byte %0d: %h vs %h", i, got[i], sent[i]); end
    end
    // bad stop bit
    send(8'h5A, 1'b0);
    repeat (3 * CPB) @(posedge clk);
    checks++;
    if (errs != 1 || got.size() != sent.size()) begin failures++; $display("frame error not flagged"); end
    // latency: byte ready at the middle of the stop bit (about 9.5 bit times)
    begin
      int t0, t1;
      got.delete();
      fork
        begin send(8'hC3, 1'b1); end
        begin
          t0 = 0;
          while (got.size() == 0) begin @(posedge clk); t0++; end
        end
      join
      checks++;
      if (t0 < 9 * CPB || t0 > 10 * CPB + 4) begin failures++; $display("latency %0d", t0); end
      t1 = t0;
    end
    // back-to-back frames at +-2 % bit time
    sent.delete();
    got.delete();
    errs = 0;
    for (int n = 0; n < 60; n++) begin
      logic [7:0] b;
      b = 8'($urandom);
      sent.push_back(b);
      send_bt(b, (n < 30) ? CPB - 2 : CPB + 2);
    end
    repeat (2 * CPB) @(posedge clk);
    checks++;
    if (got.size() != sent.size() || errs != 0) begin
      failures++; $display("back-to-back: %0d of %0d bytes, %0d errors", got.size(), sent.size(), errs);
    end
    for (int i = 0; i < sent.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] !== sent[i]) begin failures++; $display("back-to-back byte %0d: %h vs %h", i, got[i], sent[i]); end
    end
    // glitch: low for a third of a bit, then a normal frame
    got.delete();
    rx = 0; repeat (CPB / 3) @(posedge clk);
    rx = 1; repeat (2 * CPB) @(posedge clk);
    checks++;
    if (got.size() != 0 || errs != 0) begin failures++; $display("glitch started a frame"); end
    send(8'h96, 1'b1);
    repeat (50) @(posedge clk);
    checks++;
    if (got.size() != 1 || got[0] !== 8'h96) begin failures++; $display("byte after glitch lost"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

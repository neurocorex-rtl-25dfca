// tb_sdp_ram: random writes and reads against an array model; checks the
// one-cycle read latency and that a read of an address written in the same
// cycle returns the old contents.
module tb_sdp_ram;
  localparam int W = 8, D = 37;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(D)-1:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = a[$clog2(D)-1:0]; wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int c = 0; c < 2000; c++) begin
      logic [W-1:0] exp;
      @(negedge clk);
      re    = 1;
      raddr = $clog2(D)'($urandom % D);
      we    = $urandom % 2;
      waddr = (c % 7 == 0) ? raddr : $clog2(D)'($urandom % D);
      wdata = W'($urandom);
      exp   = model[raddr];
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      checks++;
      if (rdata !== exp) begin failures++; $display("addr %0d: %h expected %h", raddr, rdata, exp); end
      // rdata holds while re is low
      @(negedge clk);
      checks++;
      if (rdata !== exp) begin failures++; $display("rdata did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

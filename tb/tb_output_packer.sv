// tb_output_packer: hands step records and read replies to the packer with a
// randomly stalling byte sink and checks the byte stream: E0, step number,
// ceil(N/8) spike bitmap bytes with neuron i in bit i, the monitored
// potential as three sign-extended bytes; D1 and three data bytes for a
// reply; a record arriving while the previous one is being sent is lost and
// flagged. Uses N = 12 (two bitmap bytes).
module tb_output_packer;
  import ncx_pkg::*;
  localparam int N = 12;
  logic clk = 0, rst_n = 0, step_valid = 0, rsp_valid = 0, out_ready = 0;
  logic [N-1:0] step_spikes = 0;
  logic [7:0] step_t = 0;
  fix_t step_v = 0;
  logic [23:0] rsp_data = 0;
  logic out_valid, lost;
  logic [7:0] out_data;
  int checks = 0, failures = 0;

  output_packer #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] bytes_q [$];
  int losts = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) bytes_q.push_back(out_data);
    if (lost) losts++;
  end
  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  task automatic wait_bytes(input int n);
    int guard = 0;
    while (bytes_q.size() < n && guard < 1000) begin @(negedge clk); guard++; end
  endtask

  task automatic expect_bytes(input logic [7:0] exp [$], input string what);
    wait_bytes(exp.size());
    checks++;
    if (bytes_q.size() != exp.size()) begin
      failures++; $display("%s: %0d bytes, expected %0d", what, bytes_q.size(), exp.size());
    end
    for (int i = 0; i < exp.size() && i < bytes_q.size(); i++) begin
      checks++;
      if (bytes_q[i] !== exp[i]) begin failures++; $display("%s byte %0d: %h expected %h", what, i, bytes_q[i], exp[i]); end
    end
    bytes_q.delete();
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      logic [N-1:0] s;
      logic [7:0] t;
      fix_t v;
      logic [23:0] vx;
      s = N'($urandom); t = 8'($urandom); v = fix_t'($urandom); vx = 24'(v);
      @(negedge clk); step_valid = 1; step_spikes = s; step_t = t; step_v = v;
      @(negedge clk); step_valid = 0;
      expect_bytes('{8'hE0, t, s[7:0], {4'h0, s[11:8]}, vx[23:16], vx[15:8], vx[7:0]}, "step");
      @(negedge clk); rsp_valid = 1; rsp_data = 24'($urandom); vx = rsp_data;
      @(negedge clk); rsp_valid = 0;
      expect_bytes('{8'hD1, vx[23:16], vx[15:8], vx[7:0]}, "reply");
    end
    // two records back to back: second one lost
    out_ready = 0;
    @(negedge clk); step_valid = 1;
    @(negedge clk); step_valid = 1;
    @(negedge clk); step_valid = 0;
    wait_bytes(7);
    repeat (20) @(negedge clk);
    checks++; if (losts != 1 || bytes_q.size() != 7) begin failures++; $display("lost %0d, bytes %0d", losts, bytes_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

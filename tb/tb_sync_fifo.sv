// tb_sync_fifo: random simultaneous pushes and pops against a queue model,
// with a depth that is not a power of two; checks data order, the empty and
// full flags, the fill count, overflow on a push into a full FIFO, a push
// and pop in the same cycle while full, and clearing.
module tb_sync_fifo;
  localparam int W = 12, D = 5;
  logic clk = 0, rst_n = 0, clr = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic empty, full, overflow;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      bit exp_ovf;
      @(negedge clk);
      // compare outputs with the model
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == D) || count != model.size()) begin
        failures++; $display("flags: size %0d empty %b full %b count %0d", model.size(), empty, full, count);
      end
      if (model.size() > 0) begin
        checks++;
        if (rd_data !== model[0]) begin failures++; $display("head %h expected %h", rd_data, model[0]); end
      end
      wr_en   = ($urandom % 100) < ((c / 500) % 2 ? 70 : 35);
      rd_en   = ($urandom % 100) < 50;
      wr_data = W'($urandom);
      clr     = (c % 997 == 996);
      exp_ovf = wr_en && (model.size() == D) && !(rd_en);
      @(posedge clk);
      #1;
      if (clr) model.delete();
      else begin
        bit did_rd, did_wr;
        did_rd = rd_en && model.size() > 0;
        did_wr = wr_en && (model.size() < D || did_rd);
        if (did_rd) void'(model.pop_front());
        if (did_wr) model.push_back(wr_data);
        checks++;
        if (overflow != exp_ovf) begin failures++; $display("overflow %b expected %b", overflow, exp_ovf); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_synapse_bank: writes random synapse entries with random per-bank write
// enables and checks, against a model of five independent banks, that each
// read returns the fields last written into each bank, so a weight write
// leaves traces and mask untouched and vice versa.
module tb_synapse_bank;
  import ncx_pkg::*;
  localparam int R = 3, C = 4, D = R * C;
  logic clk = 0, re = 0;
  syn_we_t we = '0;
  logic [$clog2(D)-1:0] waddr = 0, raddr = 0;
  syn_entry_t wdata = '0, rdata;
  syn_entry_t model [D];
  int checks = 0, failures = 0;

  synapse_bank #(.ROWS(R), .COLS(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = '1; waddr = a[$clog2(D)-1:0];
      wdata = syn_entry_t'({$urandom, $urandom}); model[a] = wdata;
    end
    for (int c = 0; c < 1500; c++) begin
      @(negedge clk);
      we    = syn_we_t'($urandom);
      waddr = $clog2(D)'($urandom % D);
      wdata = syn_entry_t'({$urandom, $urandom});
      if (we.w)    model[waddr].w    = wdata.w;
      if (we.en)   model[waddr].en   = wdata.en;
      if (we.pre)  model[waddr].pre  = wdata.pre;
      if (we.upd)  model[waddr].upd  = wdata.upd;
      if (we.post) model[waddr].post = wdata.post;
      @(negedge clk);
      we = '0; re = 1; raddr = $clog2(D)'($urandom % D);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== model[raddr]) begin
        failures++; $display("addr %0d: %h expected %h", raddr, rdata, model[raddr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

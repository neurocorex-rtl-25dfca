// tb_host_decoder: feeds byte frames to the decoder and checks the decoded
// write and read requests (target, row, column, data), the 24-bit spike
// words, the run level and clear pulse, that unknown command bytes are
// skipped, and that a request is held while not accepted and bytes arriving
// meanwhile are reported as dropped. A random phase then sends 300 frames of
// all four kinds, with junk bytes and random gaps in between, and compares
// every decoded request, spike word and control action with the expected one.
module tb_host_decoder;
  import ncx_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, req_ready = 0;
  logic [7:0] in_data = 0;
  logic req_valid, spike_valid, run, clear, drop;
  host_req_t req;
  spike_word_t spike;
  int checks = 0, failures = 0;

  host_decoder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  host_req_t   reqs [$];
  spike_word_t spikes [$];
  int clears = 0, drops = 0;
  always @(negedge clk) begin
    if (req_valid && req_ready) reqs.push_back(req);
    if (spike_valid) spikes.push_back(spike);
    if (clear) clears++;
    if (drop) drops++;
  end

  task automatic put(input logic [7:0] b);
    @(negedge clk); in_valid = 1; in_data = b;
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  // byte with a random gap of 0..2 idle cycles after it
  task automatic put_fast(input logic [7:0] b);
    int g;
    @(negedge clk); in_valid = 1; in_data = b;
    @(negedge clk); in_valid = 0;
    g = $urandom_range(0, 2);
    repeat (g) @(negedge clk);
  endtask

  host_req_t   exp_reqs [$];
  spike_word_t exp_spikes [$];

  initial begin
    host_req_t r;
    repeat (3) @(negedge clk);
    rst_n = 1;
    req_ready = 1;
    // write W_in[0x0102][0x0304] = 0x0A0B0C
    put(8'h37);  // junk, ignored
    put(8'hA0); put(8'h02); put(8'h01); put(8'h02); put(8'h03); put(8'h04);
    put(8'h0A); put(8'h0B); put(8'h0C);
    // read neuron parameter 3 of neuron 0x0063
    put(8'hD0); put(8'h04); put(8'h00); put(8'h63); put(8'h00); put(8'h03);
    // spikes
    put(8'hB0); put(8'h00); put(8'h2A); put(8'h05);
    put(8'hB0); put(8'h3F); put(8'hFF); put(8'h00);
    // control: run, then clear
    put(8'hC0); put(8'h01);
    checks++; if (run !== 1'b1) begin failures++; $display("run not set"); end
    put(8'hC0); put(8'h03);
    checks++; if (clears != 1 || run !== 1'b1) begin failures++; $display("clear not pulsed"); end
    put(8'hC0); put(8'h00);
    checks++; if (run !== 1'b0) begin failures++; $display("run not cleared"); end

    checks++;
    if (reqs.size() != 2) begin failures++; $display("%0d requests", reqs.size()); end
    else begin
      r = reqs[0];
      checks++;
      if (!r.write || r.target != TGT_WIN || r.row != 16'h0102 || r.col != 16'h0304 ||
          r.data != 24'h0A0B0C) begin failures++; $display("write decoded as %p", r); end
      r = reqs[1];
      checks++;
      if (r.write || r.target != TGT_NPARAM || r.row != 16'h0063 || r.col != 16'h0003)
        begin failures++; $display("read decoded as %p", r); end
    end
    checks++;
    if (spikes.size() != 2 || spikes[0] != 24'h002A05 || spikes[1] != 24'h3FFF00) begin
      failures++; $display("spikes %p", spikes);
    end

    // back-pressure: request held while not ready, extra byte dropped
    req_ready = 0;
    put(8'hA0); put(8'h00); put(8'h00); put(8'h01); put(8'h00); put(8'h02);
    put(8'h00); put(8'h00); put(8'h7F);
    put(8'hB0);  // arrives while the request waits
    checks++;
    if (!req_valid || req.col != 16'h0002 || req.data != 24'h7F || drops != 1) begin
      failures++; $display("back-pressure: valid %b req %p drops %0d", req_valid, req, drops);
    end
    @(negedge clk); req_ready = 1;
    @(negedge clk);
    checks++;
    if (req_valid || reqs.size() != 3) begin failures++; $display("request not released"); end

    // random phase
    reqs.delete(); spikes.delete();
    clears = 0; drops = 0;
    begin
      int kind, n_clear, junk;
      logic [7:0] b, fl;
      logic exp_run;
      host_req_t e;
      spike_word_t sw;
      n_clear = 0;
      exp_run = run;
      for (int f = 0; f < 300; f++) begin
        junk = $urandom_range(0, 3);
        if (junk == 0) begin
          b = 8'($urandom);
          if (b != CMD_WRITE && b != CMD_READ && b != CMD_SPIKE && b != CMD_CTRL) put_fast(b);
        end
        kind = $urandom_range(0, 3);
        e = '0;
        case (kind)
          0, 1: begin
            e.write  = (kind == 0);
            e.target = target_t'($urandom_range(0, 5));
            e.row    = 16'($urandom);
            e.col    = 16'($urandom);
            if (e.write) e.data = 24'($urandom);
            put_fast(e.write ? CMD_WRITE : CMD_READ);
            put_fast(8'(e.target));
            put_fast(e.row[15:8]); put_fast(e.row[7:0]);
            put_fast(e.col[15:8]); put_fast(e.col[7:0]);
            if (e.write) begin
              put_fast(e.data[23:16]); put_fast(e.data[15:8]); put_fast(e.data[7:0]);
            end
            exp_reqs.push_back(e);
          end
          2: begin
            sw = 24'($urandom);
            put_fast(CMD_SPIKE);
            put_fast(sw[23:16]); put_fast(sw[15:8]); put_fast(sw[7:0]);
            exp_spikes.push_back(sw);
          end
          default: begin
            fl = 8'($urandom_range(0, 3));
            put_fast(CMD_CTRL); put_fast(fl);
            @(negedge clk);
            checks++;
            if (run !== fl[0]) begin failures++; $display("frame %0d: run %b for flags %h", f, run, fl); end
            if (fl[1]) n_clear++;
          end
        endcase
      end
      repeat (5) @(negedge clk);
      checks++;
      if (reqs.size() != exp_reqs.size()) begin
        failures++; $display("random: %0d requests, expected %0d", reqs.size(), exp_reqs.size());
      end else
        for (int k = 0; k < reqs.size(); k++) begin
          checks++;
          if (reqs[k].write != exp_reqs[k].write || reqs[k].target != exp_reqs[k].target ||
              reqs[k].row != exp_reqs[k].row || reqs[k].col != exp_reqs[k].col ||
              (exp_reqs[k].write && reqs[k].data != exp_reqs[k].data)) begin
            failures++; $display("random request %0d: got %p expected %p", k, reqs[k], exp_reqs[k]);
          end
        end
      checks++;
      if (spikes.size() != exp_spikes.size()) begin
        failures++; $display("random: %0d spikes, expected %0d", spikes.size(), exp_spikes.size());
      end else
        for (int k = 0; k < spikes.size(); k++) begin
          checks++;
          if (spikes[k] != exp_spikes[k]) begin
            failures++; $display("random spike %0d: %h expected %h", k, spikes[k], exp_spikes[k]);
          end
        end
      checks++;
      if (clears != n_clear || drops != 0) begin
        failures++; $display("random: %0d clears (expected %0d), %0d drops", clears, n_clear, drops);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_workload_digits: DIGITS-style inference on the emulator at its default
// size and rates: a two-layer feedforward network of 64 inputs (one per
// pixel of an 8x8 image) and 10 output neurons (one per class), learning
// off, each sample presented for 32 time steps of 1 ms.
//
// The trained weights are not available, so the network is built from ten
// random binary 8x8 class templates: W_in[pixel][class] = +3 where the
// template has the pixel on, -1 where it is off (weights of 1.0 current unit
// each, w_shift 10). A sample is its class template with 8% of the pixels
// flipped; pixel intensities (1 on, 0 off) are rate-coded as twice that
// many spikes spread uniformly over the 32 steps, as in the published
// experiment. Between samples the network is stopped and cleared. Every
// step packet must match the reference model, and the predicted class (the
// output neuron with most spikes) must be the same as the model's; the
// accuracy against the true labels is reported and must reach 75%.
module tb_workload_digits;
  import ncx_pkg::*;
  localparam int N = 100, NI = 100, CPB = 100;
  localparam int PIX = 64, CLS = 10, STEPS = 32, SAMPLES = 4;

  logic clk = 0, rst_n = 0, rx = 1;
  logic tx, running, in_fifo_overflow, step_overrun, record_lost, link_error, late_spike;
  int checks = 0, failures = 0;

  neurocorex_top dut (
    .clk, .rst_n, .uart_rx_i(rx), .uart_tx_o(tx), .running, .in_fifo_overflow,
    .step_overrun, .record_lost, .link_error, .late_spike);

  always #5 clk = ~clk;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "ncx_ref_model.svh"
  `include "ncx_host_link.svh"

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  bit tmpl [CLS][PIX];

  initial begin
    int correct;
    lam = 131071; shift = 10; dwp = 1; dwn = 1; tpre = 15; tpost = 30; mon = 0;
    le_aa = 0; le_in = 0;
    model_init();
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (20100) @(negedge clk);

    // one-step synaptic current: lambda_syn at the format maximum
    wr(TGT_GLOBAL, 0, REG_LAMBDA_SYN, lam);
    for (int c = 0; c < CLS; c++) begin
      m_vth[c] = 6 * 1024; m_leak[c] = 256;
      wr(TGT_NPARAM, c, NP_V_TH, m_vth[c]);
      wr(TGT_NPARAM, c, NP_LEAK, m_leak[c]);
      for (int p = 0; p < PIX; p++) begin
        int r;
        r = int'($urandom % 100);
        tmpl[c][p] = (r < 40);
        m_in[p][c].w = tmpl[c][p] ? 3 : -1;
        wr(TGT_WIN, p, c, m_in[p][c].w & 255);
      end
    end

    correct = 0;
    for (int s = 0; s < SAMPLES; s++) begin
      int label, pred, mpred, best;
      int times [$], addrs [$];
      bit px [PIX];
      int mcnt [CLS];
      label = s % CLS;
      for (int p = 0; p < PIX; p++) begin
        int r;
        r = int'($urandom % 100);
        px[p] = tmpl[label][p] ^ (r < 8);
      end
      // rate code: an "on" pixel gives 2 spikes at uniformly spread steps
      times = {}; addrs = {};
      for (int t = 0; t < STEPS; t++)
        for (int p = 0; p < PIX; p++)
          if (px[p] && (t == (p % 16) || t == 16 + (p % 16))) begin
            times.push_back(t); addrs.push_back(p);
          end
      new_run();
      ctrl(0, 1);
      repeat (20100) @(negedge clk);
      for (int x = 0; x < times.size(); x++)
        spike(addrs[x], (x == 0) ? times[0] : times[x] - times[x - 1]);
      foreach (mcnt[c]) mcnt[c] = 0;
      ctrl(1, 0);
      repeat (STEPS) @(posedge dut.u_engine.step_done);
      ctrl(0, 0);
      drain();
      for (int t = 0; t < STEPS; t++)
        for (int c = 0; c < CLS; c++) mcnt[c] += int'(exp_spk[t][c]);
      pred = 0; mpred = 0; best = -1;
      for (int c = 0; c < CLS; c++) if (spk_cnt[c] > best) begin best = spk_cnt[c]; pred = c; end
      best = -1;
      for (int c = 0; c < CLS; c++) if (mcnt[c] > best) begin best = mcnt[c]; mpred = c; end
      $write("sample %0d label %0d: %0d input spikes, predicted %0d (model %0d), counts",
             s, label, times.size(), pred, mpred);
      for (int c = 0; c < CLS; c++) $write(" %0d", spk_cnt[c]);
      $write("\n");
      check(pred == mpred, "prediction as in the model");
      if (pred == label) correct++;
    end
    $display("accuracy %0d of %0d, packets %0d", correct, SAMPLES, n_pkts);
    check(n_pkts == SAMPLES * STEPS, "one packet per step");
    check(n_off == 0 && due_q.size() == 0, "input spikes accepted in their due step");
    check(correct * 4 >= SAMPLES * 3, "accuracy of at least 75%");
    check(!step_overrun && !record_lost && !in_fifo_overflow && !late_spike && !link_error,
          "no error flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_workload_graph: a MicroSeer-sized spiking graph network on the emulator
// at its default size and rates: 90 neurons in W_AA, 84 "paper" neurons and
// 6 "topic" neurons, with learning on the paper-topic synapses.
//
// The citation graph itself is not available, so a random connected one is
// generated: every paper cites one earlier paper, plus 60 extra random
// citations; citations are static synapses in both directions. 60 training
// papers have a plastic synapse pair with their topic; the other 24 (test
// papers) have a weak plastic synapse pair with every topic. A test paper is
// started by an input spike (input i drives paper i through W_in); the spike
// spreads through the citations and the topics, each neuron firing once
// (long refractory period), and STDP adjusts the paper-topic weights on the
// way. Three test papers are run for 20 steps each, with a clear in between.
// Every step packet must match the reference model, and potentiation,
// depression and their event counts must agree with the model; the first
// topic to fire is reported as the prediction.
module tb_workload_graph;
  import ncx_pkg::*;
  localparam int N = 100, NI = 100, CPB = 100;
  localparam int PAPERS = 84, TOPICS = 6, TRAIN = 60, STEPS = 20, TESTS = 3;

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

  int n_pot = 0, n_dep = 0;
  always @(negedge clk) begin
    n_pot += int'(dut.u_engine.ev_pot_aa);
    n_dep += int'(dut.u_engine.ev_dep_aa);
  end

  task automatic syn(input int a, input int b, input int w, input int en);
    m_aa[a][b].w = w; m_aa[a][b].en = en;
    wr(TGT_WAA, a, b, w & 255);
    if (en != 0) wr(TGT_ENAA, a, b, 1);
  endtask

  initial begin
    int label [PAPERS];
    lam = 512; shift = 10; dwp = 1; dwn = 1; tpre = 15; tpost = 30; mon = PAPERS;
    le_aa = 1; le_in = 0;
    model_init();
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (20100) @(negedge clk);

    wr(TGT_GLOBAL, 0, REG_LAMBDA_SYN, lam);
    wr(TGT_GLOBAL, 0, REG_STDP_EN, 1);
    wr(TGT_GLOBAL, 0, REG_MON, mon);
    for (int k = 0; k < PAPERS + TOPICS; k++) begin
      m_vth[k] = (k < PAPERS) ? 1536 : 3 * 1024; m_leak[k] = 64; m_tref[k] = 100;
      wr(TGT_NPARAM, k, NP_V_TH, m_vth[k]);
      wr(TGT_NPARAM, k, NP_LEAK, m_leak[k]);
      wr(TGT_NPARAM, k, NP_T_REF, m_tref[k]);
    end
    // input i starts paper i
    for (int i = 0; i < PAPERS; i++) begin
      m_in[i][i].w = 4; wr(TGT_WIN, i, i, 4);
    end
    // citations: a spanning tree plus extra edges, static, both directions
    for (int i = 1; i < PAPERS; i++) begin
      int j;
      j = int'($urandom % i);
      syn(i, j, 2, 0); syn(j, i, 2, 0);
    end
    for (int x = 0; x < 60; x++) begin
      int i, j;
      i = int'($urandom % PAPERS); j = int'($urandom % PAPERS);
      if (i != j) begin syn(i, j, 2, 0); syn(j, i, 2, 0); end
    end
    // paper-topic synapses, plastic
    for (int i = 0; i < PAPERS; i++) begin
      label[i] = int'($urandom % TOPICS);
      if (i < TRAIN) begin
        syn(i, PAPERS + label[i], 2, 1); syn(PAPERS + label[i], i, 1, 1);
      end else
        for (int c = 0; c < TOPICS; c++) begin
          syn(i, PAPERS + c, 1, 1); syn(PAPERS + c, i, 1, 1);
        end
    end

    for (int tst = 0; tst < TESTS; tst++) begin
      int paper, first, first_t;
      paper = TRAIN + 5 * tst;
      new_run();
      ctrl(0, 1);
      repeat (20100) @(negedge clk);
      spike(paper, 1);
      ctrl(1, 0);
      repeat (STEPS) @(posedge dut.u_engine.step_done);
      ctrl(0, 0);
      drain();
      first = -1; first_t = 999;
      for (int t = 0; t < STEPS; t++)
        for (int c = 0; c < TOPICS; c++)
          if (exp_spk[t][PAPERS + c] && t < first_t) begin first_t = t; first = c; end
      $display("test paper %0d: papers fired %0d, first topic %0d at step %0d",
               paper, count_papers(), first, first_t);
      check(spk_cnt[paper] == 1, "test paper fired once");
    end
    rd_req(TGT_WAA, TRAIN, PAPERS);
    rd_req(TGT_WAA, TRAIN + 5, PAPERS + 1);
    repeat (30000) @(negedge clk);
    check(replies.size() == 2, "two read replies");
    if (replies.size() == 2) begin
      check(8'(replies[0]) == 8'(m_aa[TRAIN][PAPERS].w), "test paper-topic weight read back");
      check(8'(replies[1]) == 8'(m_aa[TRAIN + 5][PAPERS + 1].w), "second read back");
    end
    $display("packets %0d (%0d differ), potentiations %0d/%0d, depressions %0d/%0d",
             n_pkts, n_pkt_bad, n_pot, mp_aa, n_dep, md_aa);
    check(n_pkts == TESTS * STEPS, "one packet per step");
    check(n_pot > 0 && n_pot == mp_aa, "potentiation as modelled");
    check(n_dep > 0 && n_dep == md_aa, "depression as modelled");
    check(n_off == 0, "input spikes accepted in their due step");
    check(!step_overrun && !record_lost && !in_fifo_overflow && !late_spike && !link_error,
          "no error flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int count_papers();
    int n;
    n = 0;
    for (int i = 0; i < PAPERS; i++) n += int'(spk_cnt[i] > 0);
    return n;
  endfunction
endmodule

// tb_neurocorex_full: the emulator at its default size and rates (100
// neurons, 100 inputs, 100 MHz clock, 1 Mbit/s link, 100 kHz neuron clock,
// so one 1 ms step per 100 neuron updates), with no parameter changes.
//
// Over the UART link it loads a sparse random network (input synapses and
// recurrent synapses with learning enabled on some of them), sends a train of
// input spikes, runs 12 time steps of 1 ms and stops. Every step packet is
// compared with the reference model (ncx_ref_model.svh), which is given the
// input spikes the engine accepted in each step; those must be accepted in
// their due step. Also checked: step starts are exactly 100,000 clocks
// (1 ms) apart, no step overruns, no step record is lost, neurons fire both
// from inputs and through recurrent synapses, learning happened and its
// event count agrees with the model, and learned weights read back as
// modelled.
module tb_neurocorex_full;
  import ncx_pkg::*;
  localparam int N = 100, NI = 100, CPB = 100;

  logic clk = 0, rst_n = 0, rx = 1;
  logic tx, running, in_fifo_overflow, step_overrun, record_lost, link_error, late_spike;
  int checks = 0, failures = 0;

  neurocorex_top dut (
    .clk, .rst_n, .uart_rx_i(rx), .uart_tx_o(tx), .running, .in_fifo_overflow,
    .step_overrun, .record_lost, .link_error, .late_spike);

  always #5 clk = ~clk;

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "ncx_ref_model.svh"

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------ host -> device
  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      @(negedge clk) rx = f[i];
      repeat (CPB - 1) @(negedge clk);
    end
  endtask

  task automatic wr(input int tg, input int row, input int col, input int data);
    send_byte(CMD_WRITE); send_byte(8'(tg));
    send_byte(8'(row >> 8)); send_byte(8'(row)); send_byte(8'(col >> 8)); send_byte(8'(col));
    send_byte(8'(data >> 16)); send_byte(8'(data >> 8)); send_byte(8'(data));
  endtask

  task automatic rd_req(input int tg, input int row, input int col);
    send_byte(CMD_READ); send_byte(8'(tg));
    send_byte(8'(row >> 8)); send_byte(8'(row)); send_byte(8'(col >> 8)); send_byte(8'(col));
  endtask

  int h_base = 0;
  int due_q [$];
  task automatic spike(input int addr, input int dt);
    send_byte(CMD_SPIKE); send_byte(8'(addr >> 8)); send_byte(8'(addr)); send_byte(8'(dt));
    h_base += dt;
    due_q.push_back(h_base);
  endtask

  // ------------------------------------------------------ device -> host
  byte unsigned rxq [$];
  always begin
    logic [7:0] b;
    @(negedge tx);
    repeat (CPB / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (CPB) @(posedge clk);
      b[i] = tx;
    end
    repeat (CPB) @(posedge clk);
    if (tx !== 1'b1) begin failures++; $display("bad stop bit"); end
    rxq.push_back(b);
  end

  logic [N-1:0] exp_spk [256];
  int           exp_v   [256];
  bit           exp_ok  [256];
  int replies [$];
  int n_pkts = 0, n_pkt_ok = 0, n_recur = 0, n_spk = 0;
  localparam int NB = (N + 7) / 8;

  always begin
    byte unsigned c;
    wait (rxq.size() > 0);
    c = rxq.pop_front();
    if (c == RSP_STEP) begin
      int tt, v;
      logic [N-1:0] s;
      wait (rxq.size() >= NB + 4);
      tt = rxq.pop_front();
      s = '0;
      for (int i = 0; i < NB; i++) begin
        logic [7:0] by;
        by = rxq.pop_front();
        for (int j = 0; j < 8; j++) if (8 * i + j < N) s[8 * i + j] = by[j];
      end
      v = rxq.pop_front(); v = (v << 8) | rxq.pop_front(); v = (v << 8) | rxq.pop_front();
      v = int'(fix_t'(v));
      n_pkts++;
      checks++;
      if (!exp_ok[tt] || s !== exp_spk[tt] || v != exp_v[tt]) begin
        failures++;
        $display("packet t=%0d: spikes %h v %0d, expected %h v %0d", tt, s, v, exp_spk[tt], exp_v[tt]);
      end else n_pkt_ok++;
      n_spk += $countones(s);
      n_recur += $countones(s[N-1:NI/2]);
    end else if (c == RSP_READ) begin
      int d;
      wait (rxq.size() >= 3);
      d = rxq.pop_front(); d = (d << 8) | rxq.pop_front(); d = (d << 8) | rxq.pop_front();
      replies.push_back(d);
    end else begin
      failures++;
      $display("unexpected byte %h", c);
    end
  end

  // --------------------------------------------- model beside the engine
  int acc_t [$], acc_a [$];
  int n_off = 0, n_steps = 0;
  longint last_done = -1, t_cyc = 0;
  int n_period_bad = 0;
  always @(negedge clk) begin
    t_cyc++;
    if (dut.u_engine.in_valid && dut.u_engine.in_ready && dut.u_engine.in_addr < NI) begin
      acc_t.push_back(int'(dut.u_engine.t_now));
      acc_a.push_back(int'(dut.u_engine.in_addr));
      if (due_q.size() == 0 || due_q.pop_front() != int'(dut.u_engine.t_now)) n_off++;
    end
    if (dut.u_engine.step_done) begin
      int ins [$];
      int st, vm;
      logic [N-1:0] sp;
      st = int'(dut.u_engine.t_now) - 1;
      ins = {};
      while (acc_t.size() > 0 && acc_t[0] == st) begin
        ins.push_back(acc_a[0]); void'(acc_t.pop_front()); void'(acc_a.pop_front());
      end
      model_step(ins, sp, vm);
      exp_spk[st % 256] = sp;
      exp_v[st % 256]   = vm;
      exp_ok[st % 256]  = 1;
      n_steps++;
    end
    if (dut.step_tick) begin
      if (last_done >= 0 && t_cyc - last_done != 64'd100000) n_period_bad++;
      last_done = t_cyc;
    end
  end

  int n_pot = 0, n_dep = 0, n_ovr = 0, n_lost = 0;
  always @(negedge clk) begin
    n_pot += int'(dut.u_engine.ev_pot_aa) + int'(dut.u_engine.ev_pot_in);
    n_dep += int'(dut.u_engine.ev_dep_aa) + int'(dut.u_engine.ev_dep_in);
    n_ovr += int'(dut.u_engine.ev_overrun);
    n_lost += int'(dut.pk_lost);
  end

  // ------------------------------------------------------------- stimulus
  initial begin
    int src [$], dst [$];
    lam = 256; shift = 10; dwp = 1; dwn = 1; tpre = 15; tpost = 30; mon = 60;
    le_aa = 1; le_in = 1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      m_aa[i][j] = '{w: 0, en: 0, pre: 255, upd: 0, post: 255};
    for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++)
      m_in[i][j] = '{w: 0, en: 0, pre: 255, upd: 0, post: 255};
    for (int k = 0; k < N; k++) begin
      m_v[k] = 0; m_i[k] = 0; m_r[k] = 0; acc_cur[k] = 0; acc_nxt[k] = 0;
      m_vth[k] = 0; m_leak[k] = 0; m_tref[k] = 0; m_vres[k] = 0;
    end
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (20100) @(negedge clk);   // initialisation sweep

    // global settings: t_pre/t_post, dw keep their defaults (15, 30, 1, 1)
    wr(TGT_GLOBAL, 0, REG_LAMBDA_SYN, lam);
    wr(TGT_GLOBAL, 0, REG_STDP_EN, 3);
    wr(TGT_GLOBAL, 0, REG_MON, mon);
    // threshold 1.0 for neurons 0..49 (input driven) and 50..69 (recurrent)
    for (int k = 0; k < 70; k++) begin
      m_vth[k] = 1024; m_leak[k] = 20;
      wr(TGT_NPARAM, k, NP_V_TH, m_vth[k]);
      wr(TGT_NPARAM, k, NP_LEAK, m_leak[k]);
    end
    m_tref[3] = 3; wr(TGT_NPARAM, 3, NP_T_REF, 3);
    // input i -> neuron i for i < 50, learning on even inputs
    for (int i = 0; i < 50; i++) begin
      m_in[i][i].w = 2; wr(TGT_WIN, i, i, 2);
      if (i % 2 == 0) begin m_in[i][i].en = 1; wr(TGT_ENIN, i, i, 1); end
    end
    // neuron j (< 20) -> neuron 50 + j, learning on; 50 + j -> j, learning on
    for (int j = 0; j < 20; j++) begin
      m_aa[j][50 + j].w = 3; m_aa[j][50 + j].en = 1;
      wr(TGT_WAA, j, 50 + j, 3); wr(TGT_ENAA, j, 50 + j, 1);
      m_aa[50 + j][j].w = 1; m_aa[50 + j][j].en = 1;
      wr(TGT_WAA, 50 + j, j, 1); wr(TGT_ENAA, 50 + j, j, 1);
    end
    // input train: 30 spikes on inputs 0..49 over the first 8 steps
    for (int x = 0; x < 30; x++) spike($urandom % 50, (x == 0) ? 1 : int'($urandom % 2) * int'($urandom % 2));
    $display("inputs scheduled up to step %0d", h_base);

    send_byte(CMD_CTRL); send_byte(8'h01);
    repeat (12) @(posedge dut.u_engine.step_done);
    send_byte(CMD_CTRL); send_byte(8'h00);
    repeat (40000) @(negedge clk);

    rd_req(TGT_WAA, 0, 50);
    rd_req(TGT_WIN, 0, 0);
    rd_req(TGT_WIN, 1, 1);
    repeat (30000) @(negedge clk);
    check(replies.size() == 3, "three read replies");
    if (replies.size() == 3) begin
      check(8'(replies[0]) == 8'(m_aa[0][50].w), "W_AA[0][50] read back");
      check(8'(replies[1]) == 8'(m_in[0][0].w), "W_in[0][0] read back");
      check(8'(replies[2]) == 8'(m_in[1][1].w), "W_in[1][1] read back (no learning)");
    end

    $display("steps %0d packets %0d ok %0d spikes %0d recurrent %0d pot %0d/%0d dep %0d/%0d",
             n_steps, n_pkts, n_pkt_ok, n_spk, n_recur, n_pot, mp_aa + mp_in, n_dep, md_aa + md_in);
    check(n_steps >= 12 && n_pkts == n_steps, "one packet per step");
    check(n_period_bad == 0, "step period 100,000 clocks (1 ms)");
    check(n_spk > 0 && n_recur > 0, "input-driven and recurrent spikes");
    check(n_pot > 0 && n_pot == mp_aa + mp_in, "potentiation as modelled");
    check(n_dep == md_aa + md_in, "depression as modelled");
    check(n_off == 0 && due_q.size() == 0, "input spikes accepted in their due step");
    check(n_ovr == 0 && !step_overrun, "no step overrun");
    check(n_lost == 0 && !record_lost, "no lost step record");
    check(!link_error && !late_spike && !in_fifo_overflow, "no error flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_neurocorex_top: end-to-end test of the emulator through its UART link.
//
// A reduced instance (6 neurons, 4 inputs, 4 clocks per bit, a time step of
// 180 clocks, small FIFOs) is configured, run and read back purely with
// host frames on uart_rx_i; everything it reports is decoded from uart_tx_o.
// A reference model (ncx_ref_model.svh) is stepped alongside: it takes the
// input spikes the engine accepted in each step (the step each one was
// accepted in is itself checked against the due step from the time
// differences), and every step packet that reaches the host must match the
// model's spike vector and monitored potential.
//
// Each mechanism is counted, and a mechanism that never happened is a
// failure: input spike injection, neuron spikes, recurrent propagation
// (spikes of neurons 4 and 5, which have no input synapses), refractory
// holds, potentiation and depression on W_AA and on W_in, trace expiry,
// step overrun (a burst of 14 input spikes due in one step), input FIFO
// overflow, a late input spike, a lost step record (the link is slower than
// the step rate here), weight/parameter read-back, and clear (the step
// counter restarts, traces and states reset, weights stay).
module tb_neurocorex_top;
  import ncx_pkg::*;
  localparam int N = 6, NI = 4, CPB = 4, DIV = 30, IFD = 32, OFD = 16;

  logic clk = 0, rst_n = 0, rx = 1;
  logic tx, running, in_fifo_overflow, step_overrun, record_lost, link_error, late_spike;
  int checks = 0, failures = 0;

  neurocorex_top #(.N(N), .N_IN(NI), .CLKS_PER_BIT(CPB), .NEURON_CLK_DIV(DIV),
                   .IN_FIFO_DEPTH(IFD), .OUT_FIFO_DEPTH(OFD)) dut (
    .clk, .rst_n, .uart_rx_i(rx), .uart_tx_o(tx), .running, .in_fifo_overflow,
    .step_overrun, .record_lost, .link_error, .late_spike);

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  `include "ncx_ref_model.svh"

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

  task automatic ctrl(input logic run_b, input logic clear_b);
    send_byte(CMD_CTRL); send_byte({6'd0, clear_b, run_b});
  endtask

  // host-side copy of the scheduler time base, for the due step of each spike
  int h_base = 0;
  int due_q [$];
  task automatic spike(input int addr, input int dt);
    send_byte(CMD_SPIKE); send_byte(8'(addr >> 8)); send_byte(8'(addr)); send_byte(8'(dt));
    h_base += dt;
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

  function automatic byte unsigned next_byte();
    return rxq.pop_front();
  endfunction

  // expected step results, indexed by epoch (clear count) and step
  logic [N-1:0] exp_spk [2][256];
  int           exp_v   [2][256];
  bit           exp_ok  [2][256];
  int epoch = 0;
  int replies [$];
  int n_pkts = 0, n_pkt_ok = 0, n_recur = 0, n_spikes_seen = 0, n_clear_seen = 0;
  int last_t = -1;

  always begin
    byte unsigned c;
    wait (rxq.size() > 0);
    c = next_byte();
    if (c == RSP_STEP) begin
      int tt, v, e;
      logic [N-1:0] s;
      wait (rxq.size() >= 5);
      tt = next_byte();
      s = N'(next_byte());
      v = next_byte(); v = (v << 8) | next_byte(); v = (v << 8) | next_byte();
      v = int'(fix_t'(v));
      if (tt < last_t) begin n_clear_seen++; end
      e = n_clear_seen;
      last_t = tt;
      n_pkts++;
      checks++;
      if (e > 1 || !exp_ok[e][tt] || s !== exp_spk[e][tt] || v != exp_v[e][tt]) begin
        failures++;
        $display("packet epoch %0d t=%0d: spikes %b v %0d, expected %b v %0d", e, tt, s, v,
                 exp_spk[e][tt], exp_v[e][tt]);
      end else n_pkt_ok++;
      n_spikes_seen += $countones(s);
      if (s[4] || s[5]) n_recur++;
    end else if (c == RSP_READ) begin
      int d;
      wait (rxq.size() >= 3);
      d = next_byte(); d = (d << 8) | next_byte(); d = (d << 8) | next_byte();
      replies.push_back(d);
    end else begin
      failures++;
      $display("unexpected byte %h", c);
    end
  end

  // --------------------------------------------- model beside the engine
  int acc_t [$], acc_a [$];
  int n_late_acc = 0, n_due_bad = 0;
  always @(negedge clk) begin
    if (dut.u_engine.in_valid && dut.u_engine.in_ready && dut.u_engine.in_addr < NI) begin
      acc_t.push_back(int'(dut.u_engine.t_now));
      acc_a.push_back(int'(dut.u_engine.in_addr));
      if (due_q.size() > 0) begin
        int d;
        d = due_q.pop_front();
        if (d != int'(dut.u_engine.t_now)) n_late_acc++;
      end
    end
    if (dut.u_engine.step_done) begin
      int ins [$];
      int st;
      logic [N-1:0] sp;
      int vm;
      st = int'(dut.u_engine.t_now) - 1;
      ins = {};
      while (acc_t.size() > 0 && acc_t[0] == st) begin
        ins.push_back(acc_a[0]); void'(acc_t.pop_front()); void'(acc_a.pop_front());
      end
      if (acc_t.size() > 0 && acc_t[0] < st) begin failures++; $display("input spike missed"); end
      model_step(ins, sp, vm);
      exp_spk[epoch][st % 256] = sp;
      exp_v[epoch][st % 256]   = vm;
      exp_ok[epoch][st % 256]  = 1;
    end
  end

  // mechanism counters
  int n_in = 0, n_ref = 0, n_pot_aa = 0, n_dep_aa = 0, n_pot_in = 0, n_dep_in = 0, n_exp = 0;
  int n_ovr = 0, n_lost = 0, n_ovf = 0, n_late = 0;
  always @(negedge clk) begin
    n_in     += int'(dut.u_engine.ev_in_spike);
    n_ref    += int'(dut.u_engine.ev_refractory);
    n_pot_aa += int'(dut.u_engine.ev_pot_aa);
    n_dep_aa += int'(dut.u_engine.ev_dep_aa);
    n_pot_in += int'(dut.u_engine.ev_pot_in);
    n_dep_in += int'(dut.u_engine.ev_dep_in);
    n_exp    += int'(dut.u_engine.ev_expire);
    n_ovr    += int'(dut.u_engine.ev_overrun);
    n_lost   += int'(dut.pk_lost);
    n_ovf    += int'(dut.inf_ovf);
    n_late   += int'(dut.sch_late);
  end

  task automatic wait_steps(input int n);
    repeat (n) @(posedge dut.u_engine.step_done);
  endtask

  task automatic drain();
    // until the output link has been idle for a while
    int idle;
    idle = 0;
    while (idle < 40 * CPB) begin
      @(negedge clk);
      if (tx === 1'b1 && dut.of_empty) idle++; else idle = 0;
    end
    wait (rxq.size() == 0);
    repeat (10) @(negedge clk);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------- stimulus
  initial begin
    int d;
    lam = 512; shift = 10; dwp = 1; dwn = 1; tpre = 3; tpost = 4; mon = 5;
    le_aa = 1; le_in = 1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      m_aa[i][j] = '{w: 0, en: 0, pre: 255, upd: 0, post: 255};
    for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++)
      m_in[i][j] = '{w: 0, en: 0, pre: 255, upd: 0, post: 255};
    for (int k = 0; k < N; k++) begin
      m_v[k] = 0; m_i[k] = 0; m_r[k] = 0; acc_cur[k] = 0; acc_nxt[k] = 0;
      m_vth[k] = 1024; m_leak[k] = 50; m_tref[k] = (k == 0) ? 2 : 0; m_vres[k] = 0;
    end
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (200) @(negedge clk);

    // ---- configuration
    wr(TGT_GLOBAL, 0, REG_LAMBDA_SYN, lam);
    wr(TGT_GLOBAL, 0, REG_T_PRE, tpre);
    wr(TGT_GLOBAL, 0, REG_T_POST, tpost);
    wr(TGT_GLOBAL, 0, REG_STDP_EN, 3);
    wr(TGT_GLOBAL, 0, REG_MON, mon);
    for (int k = 0; k < N; k++) begin
      wr(TGT_NPARAM, k, NP_V_TH, m_vth[k]);
      wr(TGT_NPARAM, k, NP_LEAK, m_leak[k]);
      wr(TGT_NPARAM, k, NP_T_REF, m_tref[k]);
    end
    // input i drives neuron i
    for (int i = 0; i < NI; i++) begin
      m_in[i][i].w = 3; m_in[i][i].en = 1;
      wr(TGT_WIN, i, i, 3); wr(TGT_ENIN, i, i, 1);
    end
    // recurrent: 0 -> 5, 1 -> 4 (fixed, not learning), 5 -> 0, 2 -> 5
    m_aa[0][5].w = 4; m_aa[0][5].en = 1; wr(TGT_WAA, 0, 5, 4); wr(TGT_ENAA, 0, 5, 1);
    m_aa[1][4].w = 2;                    wr(TGT_WAA, 1, 4, 2);
    m_aa[5][0].w = 1; m_aa[5][0].en = 1; wr(TGT_WAA, 5, 0, 1); wr(TGT_ENAA, 5, 0, 1);
    m_aa[2][5].w = -3 ; m_aa[2][5].en = 1; wr(TGT_WAA, 2, 5, 8'hFD); wr(TGT_ENAA, 2, 5, 1);

    // read-back of a parameter and a global register before running
    rd_req(TGT_NPARAM, 3, NP_LEAK);
    rd_req(TGT_GLOBAL, 0, REG_T_POST);
    drain();
    check(replies.size() == 2, "two read replies");
    if (replies.size() == 2) begin
      check(replies[0] == 50, "leak read back");
      check(replies[1] == tpost, "t_post read back");
    end
    replies = {};

    // ---- phase 1: a random input train, all sent before starting
    for (int x = 0; x < 24; x++) begin
      d = (x == 0) ? 1 : int'($urandom % 3);
      spike($urandom % NI, d);
      due_q.push_back(h_base);
    end
    ctrl(1, 0);
    wait_steps(h_base + 8);

    // ---- phase 2: a burst of 14 spikes due in one step overruns it
    ctrl(0, 0);
    repeat (400) @(negedge clk);
    d = int'(dut.u_engine.t_now) + 3 - h_base;
    for (int x = 0; x < 14; x++) begin
      spike(x % NI, (x == 0) ? d : 0);
      due_q.push_back(h_base);
    end
    ctrl(1, 0);
    wait_steps(8);

    // ---- phase 3: a spike sent for a step already past is late
    spike(1, 0);
    wait_steps(4);
    due_q = {};

    // ---- phase 4: stopped, far-future spikes overflow the input FIFO
    ctrl(0, 0);
    for (int x = 0; x < IFD + 2; x++) spike(2, (x == 0) ? 200 : 0);
    drain();

    // ---- read-back of weights after learning
    rd_req(TGT_WAA, 1, 4);
    rd_req(TGT_WAA, 0, 5);
    rd_req(TGT_WIN, 0, 0);
    drain();
    check(replies.size() == 3, "three read replies");
    if (replies.size() == 3) begin
      check(replies[0] == 2, "fixed W_AA weight kept");
      check(8'(replies[1]) == 8'(m_aa[0][5].w), "learned W_AA weight");
      check(8'(replies[2]) == 8'(m_in[0][0].w), "learned W_in weight");
      $display("W_AA[0][5] = %0d, W_in[0][0] = %0d", replies[1], replies[2]);
    end

    // ---- clear and run again: the model restarts from zero state
    ctrl(0, 1);
    repeat (200) @(negedge clk);
    epoch = 1;
    for (int k = 0; k < N; k++) begin
      m_v[k] = 0; m_i[k] = 0; m_r[k] = 0; acc_cur[k] = 0; acc_nxt[k] = 0;
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      m_aa[i][j].pre = 255; m_aa[i][j].post = 255; m_aa[i][j].upd = 0;
    end
    for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++) begin
      m_in[i][j].pre = 255; m_in[i][j].post = 255; m_in[i][j].upd = 0;
    end
    acc_t = {}; acc_a = {};
    h_base = 0;
    spike(0, 1); due_q.push_back(h_base);
    spike(3, 1); due_q.push_back(h_base);
    ctrl(1, 0);
    wait_steps(6);
    ctrl(0, 0);
    drain();

    // ---- mechanisms
    $display("packets %0d ok %0d, spikes %0d, recurrent %0d, inputs %0d, refractory %0d",
             n_pkts, n_pkt_ok, n_spikes_seen, n_recur, n_in, n_ref);
    $display("potAA %0d/%0d depAA %0d/%0d potIN %0d/%0d depIN %0d/%0d expire %0d",
             n_pot_aa, mp_aa, n_dep_aa, md_aa, n_pot_in, mp_in, n_dep_in, md_in, n_exp);
    $display("overrun %0d overflow %0d late %0d lost %0d clear %0d, off-time inputs %0d",
             n_ovr, n_ovf, n_late, n_lost, n_clear_seen, n_late_acc);
    check(n_pkts > 20, "step packets received");
    check(n_in > 0, "input injection");
    check(n_spikes_seen > 0, "neuron spikes");
    check(n_recur > 0, "recurrent propagation");
    check(n_ref > 0, "refractory");
    check(n_pot_aa > 0 && n_pot_aa == mp_aa, "W_AA potentiation");
    check(n_dep_aa > 0 && n_dep_aa == md_aa, "W_AA depression");
    check(n_pot_in > 0 && n_pot_in == mp_in, "W_in potentiation");
    check(n_dep_in > 0 && n_dep_in == md_in, "W_in depression");
    check(n_exp > 0, "trace expiry");
    check(n_ovr > 0 && step_overrun, "step overrun");
    check(n_ovf > 0 && in_fifo_overflow, "input FIFO overflow");
    check(n_late == 1 && late_spike, "late spike");
    check(n_lost > 0 && record_lost, "lost step record");
    check(n_clear_seen == 1, "clear restarts the step counter");
    check(n_late_acc == 0, "input spikes accepted in their due step");
    check(!link_error, "no link error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ncx_engine: runs a small random network (N = 5 neurons, N_IN = 3
// inputs) on the engine and compares it step by step with an independent
// model of the emulator written here: input injection through W_in, the LIF
// update of every neuron, recurrent spikes through W_AA acting one step
// later, the STDP rule on both matrices with random enable masks, and the
// trace ageing. Checked every step: the spike vector and the monitored
// membrane potential; at the end: every weight read back through the host
// port, and that potentiation, depression, trace expiry, refractory holds,
// input injection, and a late step start (overrun) all happened. Also checks
// that a step takes no longer than its budget of N neuron slots.
module tb_ncx_engine;
  import ncx_pkg::*;
  localparam int N = 5, NI = 3, STEPS = 60, TICK = 400;

  logic clk = 0, rst_n = 0, run = 0, clear = 0, step_tick = 0;
  gcfg_t cfg;
  logic hreq_valid = 0, hreq_ready, hrsp_valid;
  host_req_t hreq = '0;
  logic [23:0] hrsp_data;
  logic in_valid, in_ready;
  logic [15:0] in_addr;
  logic [31:0] t_now;
  logic step_done, busy;
  logic [N-1:0] step_spikes;
  fix_t step_v;
  logic ev_in_spike, ev_bad_addr, ev_spike, ev_refractory, ev_pot_aa, ev_dep_aa;
  logic ev_pot_in, ev_dep_in, ev_expire, ev_overrun;
  int checks = 0, failures = 0;

  ncx_engine #(.N(N), .N_IN(NI)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- event counters
  int n_in = 0, n_bad = 0, n_spk = 0, n_ref = 0, n_pot_aa = 0, n_dep_aa = 0;
  int n_pot_in = 0, n_dep_in = 0, n_exp = 0, n_ovr = 0;
  always @(negedge clk) begin
    n_in += int'(ev_in_spike); n_bad += int'(ev_bad_addr); n_spk += int'(ev_spike);
    n_ref += int'(ev_refractory); n_pot_aa += int'(ev_pot_aa); n_dep_aa += int'(ev_dep_aa);
    n_pot_in += int'(ev_pot_in); n_dep_in += int'(ev_dep_in); n_exp += int'(ev_expire);
    n_ovr += int'(ev_overrun);
  end

  `include "ncx_ref_model.svh"

  // ------------------------------------------------------ host access
  task automatic host(input logic wr, input target_t tg, input int row, input int col,
                      input int data, output int rd);
    @(negedge clk);
    hreq_valid = 1;
    hreq = '{write: wr, target: tg, row: 16'(row), col: 16'(col), data: 24'(data)};
    #1;
    while (!hreq_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    hreq_valid = 0;
    rd = 0;
    if (!wr) begin
      int n;
      n = 0;
      #1;
      while (!hrsp_valid && n < 4) begin @(negedge clk); #1; n++; end
      checks++;
      if (!hrsp_valid) begin failures++; $display("no read reply"); end
      rd = int'(hrsp_data);
    end
  endtask

  // ----------------------------------------------- input spike source
  int sched_t [$], sched_a [$];
  assign in_valid = (sched_t.size() > 0) && (sched_t[0] <= int'(t_now));
  assign in_addr  = (sched_a.size() > 0) ? 16'(sched_a[0]) : '0;
  // the handshake seen before a rising edge is completed after it
  logic hs = 0;
  always @(negedge clk) begin
    if (hs) begin void'(sched_t.pop_front()); void'(sched_a.pop_front()); end
    #1 hs = in_valid && in_ready;
  end

  // -------------------------------------------------------- stimulus
  initial begin
    int rd;
    logic [N-1:0] exp_spk;
    int exp_v, step_cycles, max_cycles;

    lam = 200; shift = 10; dwp = 2; dwn = 1; tpre = 4; tpost = 5; mon = 2;
    le_aa = 1; le_in = 1;
    cfg = '{lambda_syn: fix_t'(lam), dw_pos: 8'(dwp), dw_neg: 8'(dwn), t_pre: 8'(tpre),
            t_post: 8'(tpost), stdp_en_aa: 1'b1, stdp_en_in: 1'b1, w_shift: 4'(shift),
            mon_neuron: 16'(mon)};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // wait for the initialisation sweep
    repeat (3) @(negedge clk);
    while (busy) @(negedge clk);

    // network
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      m_aa[i][j] = '{w: int'($urandom % 7) - 2, en: int'($urandom % 2), pre: 255, upd: 0, post: 255};
      host(1, TGT_WAA, i, j, m_aa[i][j].w & 255, rd);
      host(1, TGT_ENAA, i, j, m_aa[i][j].en, rd);
    end
    for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++) begin
      m_in[i][j] = '{w: int'($urandom % 5), en: int'($urandom % 2), pre: 255, upd: 0, post: 255};
      host(1, TGT_WIN, i, j, m_in[i][j].w & 255, rd);
      host(1, TGT_ENIN, i, j, m_in[i][j].en, rd);
    end
    for (int k = 0; k < N; k++) begin
      m_vth[k] = 1024 * (1 + int'($urandom % 3)); m_leak[k] = int'($urandom % 300);
      m_tref[k] = int'($urandom % 3); m_vres[k] = 0;
      m_v[k] = 0; m_i[k] = 0; m_r[k] = 0; acc_cur[k] = 0; acc_nxt[k] = 0;
      host(1, TGT_NPARAM, k, 0, m_vth[k], rd);
      host(1, TGT_NPARAM, k, 1, m_leak[k], rd);
      host(1, TGT_NPARAM, k, 2, m_tref[k], rd);
      host(1, TGT_NPARAM, k, 3, m_vres[k], rd);
    end
    // read back one parameter and one weight
    host(0, TGT_NPARAM, 1, 0, 0, rd);
    checks++; if (rd != m_vth[1]) begin failures++; $display("param read %0d vs %0d", rd, m_vth[1]); end

    // input spikes: random, plus one out-of-range address
    for (int t = 0; t < STEPS - 10; t++)
      for (int a = 0; a < NI; a++)
        if ($urandom % 3 == 0) begin sched_t.push_back(t); sched_a.push_back(a); end
    sched_t.push_front(0); sched_a.push_front(NI + 4);

    run = 1;
    max_cycles = 0;
    for (int t = 0; t < STEPS; t++) begin
      int ins [$];
      ins = {};
      for (int x = 0; x < sched_t.size(); x++)
        if (sched_t[x] == t && sched_a[x] < NI) ins.push_back(sched_a[x]);
      model_step(ins, exp_spk, exp_v);
      @(negedge clk); step_tick = 1;
      // one late tick: a second tick while the step runs
      if (t == 20) begin @(negedge clk); step_tick = 0; @(negedge clk); step_tick = 1; end
      @(negedge clk); step_tick = 0;
      step_cycles = 1;
      while (!step_done) begin @(negedge clk); step_cycles++; end
      if (step_cycles > max_cycles) max_cycles = step_cycles;
      checks++;
      if (step_spikes !== exp_spk || step_v != fix_t'(exp_v)) begin
        failures++;
        $display("step %0d: spikes %b v %0d, expected %b v %0d", t, step_spikes, step_v, exp_spk, exp_v);
      end
      if (t == 20) begin
        // the pending tick starts step 21 without a new tick
        t++;
        ins = {};
        for (int x = 0; x < sched_t.size(); x++)
          if (sched_t[x] == t && sched_a[x] < NI) ins.push_back(sched_a[x]);
        model_step(ins, exp_spk, exp_v);
        @(negedge clk);
        while (!step_done) @(negedge clk);
        checks++;
        if (step_spikes !== exp_spk) begin failures++; $display("step %0d after overrun", t); end
      end
      repeat (TICK - step_cycles - 3) @(negedge clk);
    end
    run = 0;

    // weights read back
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      host(0, TGT_WAA, i, j, 0, rd);
      checks++;
      if (8'(rd) != 8'(m_aa[i][j].w)) begin failures++; $display("W_AA[%0d][%0d] %0d vs %0d", i, j, 8'(rd), m_aa[i][j].w); end
    end
    for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++) begin
      host(0, TGT_WIN, i, j, 0, rd);
      checks++;
      if (8'(rd) != 8'(m_in[i][j].w)) begin failures++; $display("W_in[%0d][%0d] %0d vs %0d", i, j, 8'(rd), m_in[i][j].w); end
    end

    // mechanisms
    $display("events: in %0d bad %0d spikes %0d refractory %0d potAA %0d/%0d depAA %0d/%0d potIN %0d/%0d depIN %0d/%0d expire %0d overrun %0d max step %0d cycles",
             n_in, n_bad, n_spk, n_ref, n_pot_aa, mp_aa, n_dep_aa, md_aa, n_pot_in, mp_in, n_dep_in, md_in, n_exp, n_ovr, max_cycles);
    checks++; if (n_pot_aa != mp_aa || n_dep_aa != md_aa || n_pot_in != mp_in || n_dep_in != md_in) begin
      failures++; $display("learning event counts differ from the model"); end
    checks++; if (n_pot_aa == 0 || n_dep_aa == 0 || n_pot_in == 0) begin failures++; $display("a learning case never happened"); end
    checks++; if (n_exp == 0 || n_ref == 0 || n_in == 0 || n_spk == 0) begin failures++; $display("a mechanism never happened"); end
    checks++; if (n_bad != 1) begin failures++; $display("bad address not seen"); end
    checks++; if (n_ovr != 1) begin failures++; $display("overrun count %0d", n_ovr); end
    checks++; if (max_cycles > TICK) begin failures++; $display("step exceeded its budget"); end

    // clear: states and traces reset, weights kept
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    repeat (2) @(negedge clk);
    while (busy) @(negedge clk);
    checks++; if (t_now != 0) begin failures++; $display("clear kept the step counter"); end
    host(0, TGT_WAA, 1, 2, 0, rd);
    checks++; if (8'(rd) != 8'(m_aa[1][2].w)) begin failures++; $display("clear lost a weight"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

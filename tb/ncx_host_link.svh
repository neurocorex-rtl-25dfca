// ncx_host_link.svh: host side of the serial link for the system-level
// workload testbenches, included after ncx_ref_model.svh by a testbench that
// defines N, NI, CPB, checks/failures, the link signals rx/tx and the
// emulator instance `dut`.
//
// Sending: send_byte() bit-bangs one 8N1 frame (CPB clocks per bit); wr(),
// rd_req(), spike() and ctrl() build the host frames (write, read, input
// spike word, run/clear). spike() also tracks the due step of every word in
// due_q. Receiving: a process decodes the frames on tx into bytes; a second
// one parses step packets (compared with the reference model's result for
// that step, counting each neuron's spikes in spk_cnt) and read replies
// (queued in replies). Beside the engine, the model is stepped at every
// step_done with the input spikes the engine accepted during that step; each
// is checked against its due step. new_run() forgets the expectations of the
// previous run (before a clear restarts the step counter); drain() waits
// until the link has gone quiet.

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

task automatic ctrl(input bit run_b, input bit clear_b);
  send_byte(CMD_CTRL); send_byte({6'd0, clear_b, run_b});
endtask

int h_base = 0;
int due_q [$];
task automatic spike(input int addr, input int dt);
  send_byte(CMD_SPIKE); send_byte(8'(addr >> 8)); send_byte(8'(addr)); send_byte(8'(dt));
  h_base += dt;
  due_q.push_back(h_base);
endtask

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

localparam int NBYTES = (N + 7) / 8;
logic [N-1:0] exp_spk [256];
int           exp_v   [256];
bit           exp_ok  [256];
int           spk_cnt [N];
int           replies [$];
int n_pkts = 0, n_pkt_bad = 0;

always begin
  byte unsigned c;
  wait (rxq.size() > 0);
  c = rxq.pop_front();
  if (c == RSP_STEP) begin
    int tt, v;
    logic [N-1:0] s;
    wait (rxq.size() >= NBYTES + 4);
    tt = rxq.pop_front();
    s = '0;
    for (int i = 0; i < NBYTES; i++) begin
      logic [7:0] by;
      by = rxq.pop_front();
      for (int j = 0; j < 8; j++) if (8 * i + j < N) s[8 * i + j] = by[j];
    end
    v = rxq.pop_front(); v = (v << 8) | rxq.pop_front(); v = (v << 8) | rxq.pop_front();
    v = int'(fix_t'(v));
    n_pkts++;
    checks++;
    if (!exp_ok[tt] || s !== exp_spk[tt] || v != exp_v[tt]) begin
      failures++; n_pkt_bad++;
      $display("packet t=%0d differs from the model", tt);
    end
    for (int i = 0; i < N; i++) spk_cnt[i] += int'(s[i]);
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

int acc_t [$], acc_a [$];
int n_off = 0;
always @(negedge clk) begin
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
  end
end

task automatic drain();
  int idle;
  idle = 0;
  while (idle < 40 * CPB) begin
    @(negedge clk);
    if (tx === 1'b1 && dut.of_empty) idle++; else idle = 0;
  end
  wait (rxq.size() == 0);
  repeat (10) @(negedge clk);
endtask

// Forget the previous run and reset the model's dynamic state, as a clear
// does in the hardware (weights are kept).
task automatic new_run();
  foreach (exp_ok[i]) exp_ok[i] = 0;
  foreach (spk_cnt[i]) spk_cnt[i] = 0;
  for (int k = 0; k < N; k++) begin
    m_v[k] = 0; m_i[k] = 0; m_r[k] = 0; acc_cur[k] = 0; acc_nxt[k] = 0;
  end
  for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
    m_aa[i][j].pre = 255; m_aa[i][j].post = 255; m_aa[i][j].upd = 0;
  end
  for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++) begin
    m_in[i][j].pre = 255; m_in[i][j].post = 255; m_in[i][j].upd = 0;
  end
  h_base = 0;
endtask

task automatic model_init();
  for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
    m_aa[i][j] = '{w: 0, en: 0, pre: 255, upd: 0, post: 255};
  for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++)
    m_in[i][j] = '{w: 0, en: 0, pre: 255, upd: 0, post: 255};
  for (int k = 0; k < N; k++) begin
    m_vth[k] = 0; m_leak[k] = 0; m_tref[k] = 0; m_vres[k] = 0;
  end
  new_run();
endtask

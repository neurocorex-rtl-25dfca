// ncx_ref_model.svh: reference model of the network emulator, included by
// the engine and top-level testbenches (which define N and NI).
//
// Holds its own copy of both synapse matrices (weight, enable bit, pre and
// post traces, update state), the neuron parameters and states, and two
// input accumulators (this step, next step). model_step() advances one time
// step exactly as the emulator is specified to: the listed input spikes add
// their W_in row and get the presynaptic STDP update; every neuron is
// updated in order 0..N-1 with the LIF equations (linear decay of the
// current, leak, threshold, reset, refractory hold); a firing neuron adds its
// W_AA row to the next step's accumulator and triggers the pre/post STDP
// updates on its row and columns (not on W_AA's diagonal); then all traces
// age. The counters mp_/md_ count weight changes for comparison with the
// hardware's event pulses. Arithmetic uses plain integers with explicit
// clamping, independent of the hardware's fixed-point types.
  typedef struct { int w, en, pre, upd, post; } msyn_t;
  msyn_t m_aa [N][N];
  msyn_t m_in [NI][N];
  int m_vth [N], m_leak [N], m_tref [N], m_vres [N];
  int m_v [N], m_i [N], m_r [N];
  int acc_cur [N], acc_nxt [N];
  int lam, shift, dwp, dwn, tpre, tpost, mon;

  function automatic int clampf(longint x);
    if (x > 131071) return 131071;
    if (x < -131072) return -131072;
    return int'(x);
  endfunction
  function automatic int clampa(int x);
    if (x > 32767) return 32767;
    if (x < -32768) return -32768;
    return x;
  endfunction
  function automatic int clampw(int x);
    return (x > 127) ? 127 : (x < -128) ? -128 : x;
  endfunction

  function automatic msyn_t op_pre(msyn_t s, int le, output int dep);
    dep = 0;
    if (s.post != 255 && s.post > 0 && s.post < tpost) begin
      if (le && s.en) begin s.w = clampw(s.w - dwn); dep = 1; end
      s.post = 255;
    end
    s.pre = 0; s.upd = 1;
    return s;
  endfunction
  function automatic msyn_t op_post(msyn_t s, int le, output int pot);
    pot = 0;
    if (s.upd && s.pre != 255 && s.pre > 0 && s.pre < tpre) begin
      if (le && s.en) begin s.w = clampw(s.w + dwp); pot = 1; end
      s.pre = 255; s.upd = 0;
    end
    s.post = 0;
    return s;
  endfunction
  function automatic msyn_t op_age(msyn_t s);
    if (s.upd && s.pre != 255) begin
      if (s.pre + 1 >= tpre) begin s.pre = 255; s.upd = 0; end else s.pre++;
    end
    if (s.post != 255) begin
      if (s.post + 1 >= tpost) s.post = 255; else s.post++;
    end
    return s;
  endfunction

  int le_aa, le_in;
  int mp_aa = 0, md_aa = 0, mp_in = 0, md_in = 0;

  task automatic model_step(input int ins [$], output logic [N-1:0] spikes, output int vmon);
    int d;
    foreach (ins[x]) begin
      int a = ins[x];
      for (int j = 0; j < N; j++) begin
        acc_cur[j] = clampa(acc_cur[j] + m_in[a][j].w);
        m_in[a][j] = op_pre(m_in[a][j], le_in, d); md_in += d;
      end
    end
    spikes = '0;
    vmon = 0;
    for (int k = 0; k < N; k++) begin
      longint inj, idec, inew, v;
      inj  = clampf(longint'(acc_cur[k]) * (longint'(1) << shift));
      idec = m_i[k];
      if (idec > 0) begin idec -= lam; if (idec < 0) idec = 0; end
      else if (idec < 0) begin idec += lam; if (idec > 0) idec = 0; end
      inew = clampf(idec + inj);
      v    = clampf(longint'(m_v[k]) - m_leak[k] + inew);
      m_i[k] = int'(inew);
      acc_cur[k] = 0;
      if (m_r[k] != 0) begin m_v[k] = m_vres[k]; m_r[k]--; end
      else if (v > m_vth[k]) begin
        spikes[k] = 1; m_v[k] = m_vres[k]; m_r[k] = m_tref[k];
      end else m_v[k] = int'(v);
      if (k == mon) vmon = m_v[k];
      if (spikes[k]) begin
        for (int j = 0; j < N; j++) begin
          acc_nxt[j] = clampa(acc_nxt[j] + m_aa[k][j].w);
          if (j != k) begin m_aa[k][j] = op_pre(m_aa[k][j], le_aa, d); md_aa += d; end
        end
        for (int i = 0; i < N; i++)
          if (i != k) begin m_aa[i][k] = op_post(m_aa[i][k], le_aa, d); mp_aa += d; end
        for (int i = 0; i < NI; i++) begin m_in[i][k] = op_post(m_in[i][k], le_in, d); mp_in += d; end
      end
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) m_aa[i][j] = op_age(m_aa[i][j]);
    for (int i = 0; i < NI; i++) for (int j = 0; j < N; j++) m_in[i][j] = op_age(m_in[i][j]);
    for (int j = 0; j < N; j++) begin acc_cur[j] = acc_nxt[j]; acc_nxt[j] = 0; end
  endtask


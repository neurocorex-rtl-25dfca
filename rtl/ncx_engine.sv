// ncx_engine: the time-multiplexed network processor.
//
// One physical LIF neuron (lif_neuron) and one learning-rule circuit per
// weight matrix (stdp_rule) serve all N neurons in turn. All network state is
// in memories: the two synapse matrices W_AA (N x N, recurrent, all-to-all)
// and W_in (N_IN x N, from the external inputs) with their enable_STDP masks
// and STDP traces (synapse_bank), the four per-neuron parameters (sdp_ram),
// and the neuron states {V, I, refractory count}, which circulate through a
// FIFO: the head is the next neuron to update and its new state is appended
// at the tail.
//
// Every step_tick (1 ms at the default rates) starts one time step t:
//   1. INPUT   each input spike due at t (from the spike scheduler) reads row
//              `addr` of W_in: every weight is added to the input accumulator
//              of its target neuron for this step, and the STDP rule runs on
//              the entry as a presynaptic spike.
//   2. NEURON  for k = 0..N-1: the state of neuron k is popped, updated with
//              the accumulated input, and pushed back. If k fires:
//      ROW     row k of W_AA is read; each weight goes into the accumulator of
//              its target for step t+1, and each entry gets the presynaptic
//              STDP update (depression / trace reset);
//      COL     column k of W_AA and of W_in is read and gets the postsynaptic
//              update (potentiation / post trace start).
//   3. AGE     every entry of both matrices has its active traces advanced.
//   4. END     step counter t+1; spike vector and monitored V are handed out.
// Recurrent spikes of step t therefore act in step t+1 whatever the order of
// the neurons (two accumulator banks swap each step); input spikes act in the
// step they are due. Each memory sweep is pipelined at one entry per clock
// (read, then update and write back in the next cycle), so a firing neuron
// costs about N + max(N, N_IN) clocks and the trace ageing N*max(N, N_IN).
// With N = 100 a worst-case step stays well inside the 100,000 clocks of a
// 1 ms step at 100 MHz. If a step_tick arrives while the previous step is
// still running, `ev_overrun` pulses and the step starts as soon as the
// engine is free.
//
// Between steps (state IDLE) the engine serves host requests: writes of
// weights, enable bits and neuron parameters, and reads of the same, answered
// on hrsp_valid/hrsp_data one clock after the request is taken. After reset
// an initialisation sweep clears all memories (weights 0, enable 0, traces
// disabled, neuron states zero); `clear` repeats it for traces, neuron states
// and step counter only, keeping the loaded network.
//
// From the design description: the matrices, their row-major layout, the
// masks and traces, the single multiplexed neuron, the neuron-state FIFO, the
// input injection through W_in and recurrent injection through W_AA, the
// 1 ms step of 100 neuron updates. This implementation's own: the phase order
// within a step, the one-step delay of recurrent spikes, the end-of-step
// trace ageing sweep, skipping STDP on the diagonal of W_AA (a neuron's
// synapse onto itself), and the host access scheme.
module ncx_engine
  import ncx_pkg::*;
#(
  parameter int unsigned N     = 100,
  parameter int unsigned N_IN  = 100,
  parameter int unsigned ACC_W = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          run,
  input  logic          clear,
  input  logic          step_tick,
  input  gcfg_t         cfg,
  // host access (targets W_AA, EN_AA, W_IN, EN_IN, NPARAM)
  input  logic          hreq_valid,
  input  host_req_t     hreq,
  output logic          hreq_ready,
  output logic          hrsp_valid,
  output logic [23:0]   hrsp_data,
  // input spikes from the scheduler
  input  logic          in_valid,
  input  logic [15:0]   in_addr,
  output logic          in_ready,
  // time and recorded activity
  output logic [31:0]   t_now,
  output logic          step_done,
  output logic [N-1:0]  step_spikes,
  output fix_t          step_v,
  output logic          busy,
  // event pulses
  output logic          ev_in_spike,
  output logic          ev_bad_addr,
  output logic          ev_spike,
  output logic          ev_refractory,
  output logic          ev_pot_aa,
  output logic          ev_dep_aa,
  output logic          ev_pot_in,
  output logic          ev_dep_in,
  output logic          ev_expire,
  output logic          ev_overrun
);
  localparam int unsigned AA_D    = N * N;
  localparam int unsigned IN_D    = N_IN * N;
  localparam int unsigned AA_AW   = $clog2(AA_D);
  localparam int unsigned IN_AW   = $clog2(IN_D);
  localparam int unsigned NW      = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned COL_LEN = (N > N_IN) ? N : N_IN;
  localparam int unsigned AGE_LEN = (AA_D > IN_D) ? AA_D : IN_D;
  localparam int unsigned SW      = $clog2(AGE_LEN + 1);

  typedef enum logic [3:0] {
    S_INIT, S_IDLE, S_HOST_RD, S_INPUT, S_IN_ROW, S_NEUR_RD, S_NEUR_UPD,
    S_ROW, S_COL, S_AGE, S_END
  } state_t;

  state_t state;

  // ------------------------------------------------------------ registers
  logic [31:0]    t;
  logic           bsel;           // accumulator bank of the current step
  logic           tick_pend;
  logic           clear_pend;
  logic           init_full;      // initialisation also clears the network
  logic [SW-1:0]  sc;             // sweep counter
  logic           pv;             // pipeline: read data valid this cycle
  logic [SW-1:0]  pidx;           // pipeline: index of that read
  logic           p_aa, p_in;     // pipeline: which banks were read
  logic [NW-1:0]  k;              // neuron being updated
  logic [15:0]    in_row;         // input neuron being injected
  logic [N-1:0]   spk;
  fix_t           mon_v;
  host_req_t      hr_q;           // latched read request
  logic           hr_ok;

  logic signed [ACC_W-1:0] acc [2][N];

  // ------------------------------------------------------------ memories
  syn_we_t            aa_we, in_we;
  logic [AA_AW-1:0]   aa_waddr, aa_raddr;
  logic [IN_AW-1:0]   in_waddr, in_raddr;
  syn_entry_t         aa_wdata, in_wdata, aa_rdata, in_rdata;
  logic               aa_re, in_re;

  synapse_bank #(.ROWS(N), .COLS(N)) u_waa (
    .clk, .we(aa_we), .waddr(aa_waddr), .wdata(aa_wdata),
    .re(aa_re), .raddr(aa_raddr), .rdata(aa_rdata));

  synapse_bank #(.ROWS(N_IN), .COLS(N)) u_win (
    .clk, .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .re(in_re), .raddr(in_raddr), .rdata(in_rdata));

  logic [3:0]    np_we;
  logic [NW-1:0] np_waddr, np_raddr;
  logic          np_re;
  fix_t          np_wfix;
  nparam_t       np_rd;

  sdp_ram #(.WIDTH(FIX_W), .DEPTH(N)) u_p_vth (
    .clk, .we(np_we[0]), .waddr(np_waddr), .wdata(np_wfix),
    .re(np_re), .raddr(np_raddr), .rdata(np_rd.v_th));
  sdp_ram #(.WIDTH(FIX_W), .DEPTH(N)) u_p_leak (
    .clk, .we(np_we[1]), .waddr(np_waddr), .wdata(np_wfix),
    .re(np_re), .raddr(np_raddr), .rdata(np_rd.leak));
  sdp_ram #(.WIDTH(8), .DEPTH(N)) u_p_tref (
    .clk, .we(np_we[2]), .waddr(np_waddr), .wdata(np_wfix[7:0]),
    .re(np_re), .raddr(np_raddr), .rdata(np_rd.t_ref));
  sdp_ram #(.WIDTH(FIX_W), .DEPTH(N)) u_p_vreset (
    .clk, .we(np_we[3]), .waddr(np_waddr), .wdata(np_wfix),
    .re(np_re), .raddr(np_raddr), .rdata(np_rd.v_reset));

  // neuron state FIFO
  logic    sf_clr, sf_push, sf_pop, sf_empty;
  nstate_t sf_in, sf_head;
  logic [NSTATE_W-1:0] sf_head_bits;

  sync_fifo #(.WIDTH(NSTATE_W), .DEPTH(N)) u_state_fifo (
    .clk, .rst_n, .clr(sf_clr),
    .wr_en(sf_push), .wr_data(sf_in),
    .rd_en(sf_pop), .rd_data(sf_head_bits),
    .empty(sf_empty), .full(), .overflow(), .count());
  assign sf_head = nstate_t'(sf_head_bits);

  // ------------------------------------------------- datapath instances
  nstate_t lif_nxt;
  logic    lif_spike;

  lif_neuron #(.ACC_W(ACC_W)) u_lif (
    .st(sf_head), .p(np_rd), .lambda_syn(cfg.lambda_syn),
    .acc(acc[bsel][k]), .w_shift(cfg.w_shift),
    .nxt(lif_nxt), .spike(lif_spike));

  stdp_op_t   op_aa, op_in;
  syn_entry_t aa_stdp, in_stdp;
  logic       pot_aa, dep_aa, pot_in, dep_in;

  stdp_rule u_stdp_aa (
    .op(op_aa), .cur(aa_rdata), .learn_en(cfg.stdp_en_aa),
    .dw_pos(cfg.dw_pos), .dw_neg(cfg.dw_neg), .t_pre(cfg.t_pre), .t_post(cfg.t_post),
    .nxt(aa_stdp), .potentiated(pot_aa), .depressed(dep_aa));

  stdp_rule u_stdp_in (
    .op(op_in), .cur(in_rdata), .learn_en(cfg.stdp_en_in),
    .dw_pos(cfg.dw_pos), .dw_neg(cfg.dw_neg), .t_pre(cfg.t_pre), .t_post(cfg.t_post),
    .nxt(in_stdp), .potentiated(pot_in), .depressed(dep_in));

  // ------------------------------------------------------------ helpers
  localparam logic signed [ACC_W:0] ACC_MAX = (ACC_W+1)'((1 << (ACC_W - 1)) - 1);
  localparam logic signed [ACC_W:0] ACC_MIN = -ACC_MAX - 1;

  function automatic logic signed [ACC_W-1:0] acc_add(
      input logic signed [ACC_W-1:0] a, input weight_t w);
    logic signed [ACC_W:0] s;
    s = (ACC_W+1)'(a) + (ACC_W+1)'(w);
    if (s > ACC_MAX)      return ACC_MAX[ACC_W-1:0];
    else if (s < ACC_MIN) return ACC_MIN[ACC_W-1:0];
    else                  return s[ACC_W-1:0];
  endfunction

  localparam syn_entry_t ENTRY_CLEAR =
      '{w: '0, en: 1'b0, pre: TRACE_OFF, upd: 1'b0, post: TRACE_OFF};
  localparam syn_we_t WE_NONE   = '{default: 1'b0};
  localparam syn_we_t WE_LEARN  = '{w: 1'b1, en: 1'b0, pre: 1'b1, upd: 1'b1, post: 1'b1};
  localparam syn_we_t WE_ALL    = '{default: 1'b1};
  localparam syn_we_t WE_TRACES = '{w: 1'b0, en: 1'b0, pre: 1'b1, upd: 1'b1, post: 1'b1};

  logic sweep_state;
  logic [SW-1:0] sweep_len;
  logic issue, sweep_done;
  logic host_take;
  logic host_in_range;
  logic [SW-1:0] pidx_col;

  always_comb begin
    unique case (state)
      S_INIT:   sweep_len = SW'(AGE_LEN);
      S_IN_ROW: sweep_len = SW'(N);
      S_ROW:    sweep_len = SW'(N);
      S_COL:    sweep_len = SW'(COL_LEN);
      S_AGE:    sweep_len = SW'(AGE_LEN);
      default:  sweep_len = '0;
    endcase
    sweep_state = state inside {S_INIT, S_IN_ROW, S_ROW, S_COL, S_AGE};
    issue       = sweep_state && (sc < sweep_len);
    sweep_done  = sweep_state && !issue && !pv;
  end

  // host request range check
  always_comb begin
    unique case (hreq.target)
      TGT_WAA, TGT_ENAA: host_in_range = (hreq.row < 16'(N)) && (hreq.col < 16'(N));
      TGT_WIN, TGT_ENIN: host_in_range = (hreq.row < 16'(N_IN)) && (hreq.col < 16'(N));
      TGT_NPARAM:        host_in_range = (hreq.row < 16'(N)) && (hreq.col < 16'd4);
      default:           host_in_range = 1'b0;
    endcase
  end

  assign host_take  = (state == S_IDLE) && !clear_pend && hreq_valid &&
                      (hreq.target != TGT_GLOBAL);
  assign hreq_ready = host_take;

  // --------------------------------------------- memory port control
  always_comb begin
    aa_re = 1'b0; aa_raddr = '0; aa_we = WE_NONE; aa_waddr = '0; aa_wdata = aa_stdp;
    in_re = 1'b0; in_raddr = '0; in_we = WE_NONE; in_waddr = '0; in_wdata = in_stdp;
    np_re = 1'b0; np_raddr = '0; np_we = '0; np_waddr = '0; np_wfix = '0;
    op_aa = STDP_NONE; op_in = STDP_NONE;
    sf_push = 1'b0; sf_pop = 1'b0; sf_in = lif_nxt; sf_clr = 1'b0;
    in_ready = 1'b0;
    pidx_col = '0;

    unique case (state)
      S_INIT: begin
        if (sc < SW'(AA_D)) begin
          aa_we = init_full ? WE_ALL : WE_TRACES; aa_waddr = AA_AW'(sc); aa_wdata = ENTRY_CLEAR;
        end
        if (sc < SW'(IN_D)) begin
          in_we = init_full ? WE_ALL : WE_TRACES; in_waddr = IN_AW'(sc); in_wdata = ENTRY_CLEAR;
        end
        if (sc < SW'(N)) begin
          if (init_full) begin
            np_we = 4'hF; np_waddr = NW'(sc); np_wfix = '0;
          end
          sf_push = 1'b1;
          sf_in   = '0;
        end
      end
      S_IDLE: begin
        if (host_take && host_in_range) begin
          unique case (hreq.target)
            TGT_WAA, TGT_ENAA: begin
              aa_waddr = AA_AW'(hreq.row * 16'(N) + hreq.col);
              aa_raddr = aa_waddr;
              aa_wdata = '{w: weight_t'(hreq.data[7:0]), en: hreq.data[0],
                           pre: TRACE_OFF, upd: 1'b0, post: TRACE_OFF};
              if (hreq.write) begin
                aa_we.w  = (hreq.target == TGT_WAA);
                aa_we.en = (hreq.target == TGT_ENAA);
              end else aa_re = 1'b1;
            end
            TGT_WIN, TGT_ENIN: begin
              in_waddr = IN_AW'(hreq.row * 16'(N) + hreq.col);
              in_raddr = in_waddr;
              in_wdata = '{w: weight_t'(hreq.data[7:0]), en: hreq.data[0],
                           pre: TRACE_OFF, upd: 1'b0, post: TRACE_OFF};
              if (hreq.write) begin
                in_we.w  = (hreq.target == TGT_WIN);
                in_we.en = (hreq.target == TGT_ENIN);
              end else in_re = 1'b1;
            end
            TGT_NPARAM: begin
              np_waddr = NW'(hreq.row);
              np_raddr = NW'(hreq.row);
              np_wfix  = fix_t'(hreq.data[FIX_W-1:0]);
              if (hreq.write) np_we[hreq.col[1:0]] = 1'b1;
              else            np_re = 1'b1;
            end
            default: ;
          endcase
        end
      end
      S_INPUT: begin
        in_ready = in_valid;
      end
      S_IN_ROW: begin
        in_re    = issue;
        in_raddr = IN_AW'(in_row * 16'(N) + 16'(sc));
        op_in    = STDP_PRE_SPIKE;
        if (pv) begin
          in_we = WE_LEARN; in_waddr = IN_AW'(in_row * 16'(N) + 16'(pidx));
        end
      end
      S_NEUR_RD: begin
        np_re = 1'b1; np_raddr = k;
      end
      S_NEUR_UPD: begin
        sf_pop  = 1'b1;
        sf_push = 1'b1;
        sf_in   = lif_nxt;
      end
      S_ROW: begin
        aa_re    = issue;
        aa_raddr = AA_AW'(32'(k) * N + 32'(sc));
        op_aa    = STDP_PRE_SPIKE;
        if (pv && pidx != SW'(k)) begin
          aa_we = WE_LEARN; aa_waddr = AA_AW'(32'(k) * N + 32'(pidx));
        end
      end
      S_COL: begin
        aa_re    = issue && (sc < SW'(N)) && (sc != SW'(k));
        aa_raddr = AA_AW'(32'(sc) * N + 32'(k));
        in_re    = issue && (sc < SW'(N_IN));
        in_raddr = IN_AW'(32'(sc) * N + 32'(k));
        op_aa    = STDP_POST_SPIKE;
        op_in    = STDP_POST_SPIKE;
        pidx_col = pidx;
        if (pv && p_aa) begin
          aa_we = WE_LEARN; aa_waddr = AA_AW'(32'(pidx_col) * N + 32'(k));
        end
        if (pv && p_in) begin
          in_we = WE_LEARN; in_waddr = IN_AW'(32'(pidx_col) * N + 32'(k));
        end
      end
      S_AGE: begin
        aa_re    = issue && (sc < SW'(AA_D));
        aa_raddr = AA_AW'(sc);
        in_re    = issue && (sc < SW'(IN_D));
        in_raddr = IN_AW'(sc);
        op_aa    = STDP_AGE;
        op_in    = STDP_AGE;
        if (pv && p_aa) begin
          aa_we = WE_TRACES; aa_waddr = AA_AW'(pidx);
        end
        if (pv && p_in) begin
          in_we = WE_TRACES; in_waddr = IN_AW'(pidx);
        end
      end
      default: ;
    endcase

    // emptied when a clear starts; the init sweep then refills it
    if (state == S_IDLE && clear_pend) sf_clr = 1'b1;
  end

  // ---------------------------------------------------------- controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      init_full  <= 1'b1;
      t          <= '0;
      bsel       <= 1'b0;
      tick_pend  <= 1'b0;
      clear_pend <= 1'b0;
      sc         <= '0;
      pv         <= 1'b0;
      pidx       <= '0;
      p_aa       <= 1'b0;
      p_in       <= 1'b0;
      k          <= '0;
      in_row     <= '0;
      spk        <= '0;
      mon_v      <= '0;
      hr_q       <= '0;
      hr_ok      <= 1'b0;
      hrsp_valid <= 1'b0;
      hrsp_data  <= '0;
      step_done  <= 1'b0;
      step_spikes <= '0;
      step_v     <= '0;
      ev_in_spike <= 1'b0; ev_bad_addr <= 1'b0; ev_spike <= 1'b0;
      ev_refractory <= 1'b0; ev_pot_aa <= 1'b0; ev_dep_aa <= 1'b0;
      ev_pot_in <= 1'b0; ev_dep_in <= 1'b0; ev_expire <= 1'b0; ev_overrun <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int n = 0; n < N; n++) acc[b][n] <= '0;
    end else begin
      hrsp_valid    <= 1'b0;
      step_done     <= 1'b0;
      ev_in_spike   <= 1'b0;
      ev_bad_addr   <= 1'b0;
      ev_spike      <= 1'b0;
      ev_refractory <= 1'b0;
      ev_overrun    <= 1'b0;
      ev_pot_aa     <= pv && p_aa && pot_aa && (state == S_COL);
      ev_dep_aa     <= pv && (state == S_ROW) && (pidx != SW'(k)) && dep_aa;
      ev_pot_in     <= pv && p_in && pot_in && (state == S_COL);
      ev_dep_in     <= pv && (state == S_IN_ROW) && dep_in;
      ev_expire     <= pv && (state == S_AGE) &&
                       ((p_aa && aa_rdata.upd && !aa_stdp.upd) ||
                        (p_in && in_rdata.upd && !in_stdp.upd));

      if (clear) clear_pend <= 1'b1;

      // time-step strobes
      if (step_tick && run) begin
        if (state == S_IDLE && !tick_pend && !clear_pend && !hreq_valid) begin
          tick_pend <= 1'b1;
        end else begin
          if (tick_pend || state != S_IDLE) ev_overrun <= 1'b1;
          tick_pend <= 1'b1;
        end
      end

      // sweep pipeline
      pv   <= issue;
      pidx <= sc;
      p_aa <= aa_re;
      p_in <= in_re;
      if (issue) sc <= sc + 1'b1;

      unique case (state)
        S_INIT: begin
          if (sc < SW'(N)) begin
            acc[0][sc[NW-1:0]] <= '0;
            acc[1][sc[NW-1:0]] <= '0;
          end
          if (sweep_done) begin
            state     <= S_IDLE;
            init_full <= 1'b0;
            t         <= '0;
            bsel      <= 1'b0;
            spk       <= '0;
            tick_pend <= 1'b0;
          end
        end
        S_IDLE: begin
          sc <= '0;
          if (clear_pend) begin
            clear_pend <= 1'b0;
            state      <= S_INIT;
          end else if (host_take) begin
            if (!hreq.write) begin
              hr_q  <= hreq;
              hr_ok <= host_in_range;
              state <= S_HOST_RD;
            end
          end else if (tick_pend && run) begin
            tick_pend <= 1'b0;
            spk       <= '0;
            state     <= S_INPUT;
          end
        end
        S_HOST_RD: begin
          hrsp_valid <= 1'b1;
          if (!hr_ok) hrsp_data <= '0;
          else unique case (hr_q.target)
            TGT_WAA:  hrsp_data <= 24'(aa_rdata.w);
            TGT_ENAA: hrsp_data <= 24'(aa_rdata.en);
            TGT_WIN:  hrsp_data <= 24'(in_rdata.w);
            TGT_ENIN: hrsp_data <= 24'(in_rdata.en);
            TGT_NPARAM: unique case (hr_q.col[1:0])
              2'd0: hrsp_data <= 24'(np_rd.v_th);
              2'd1: hrsp_data <= 24'(np_rd.leak);
              2'd2: hrsp_data <= 24'(np_rd.t_ref);
              default: hrsp_data <= 24'(np_rd.v_reset);
            endcase
            default: hrsp_data <= '0;
          endcase
          state <= S_IDLE;
        end
        S_INPUT: begin
          sc <= '0;
          if (in_valid) begin
            if (in_addr < 16'(N_IN)) begin
              in_row      <= in_addr;
              ev_in_spike <= 1'b1;
              state       <= S_IN_ROW;
            end else ev_bad_addr <= 1'b1;
          end else begin
            k     <= '0;
            state <= S_NEUR_RD;
          end
        end
        S_IN_ROW: begin
          if (pv) acc[bsel][pidx[NW-1:0]] <= acc_add(acc[bsel][pidx[NW-1:0]], in_rdata.w);
          if (sweep_done) state <= S_INPUT;
        end
        S_NEUR_RD: begin
          state <= S_NEUR_UPD;
        end
        S_NEUR_UPD: begin
          acc[bsel][k] <= '0;
          spk[k]       <= lif_spike;
          ev_refractory <= (sf_head.ref_cnt != '0);
          if (16'(k) == cfg.mon_neuron) mon_v <= lif_nxt.v;
          sc <= '0;
          if (lif_spike) begin
            ev_spike <= 1'b1;
            state    <= S_ROW;
          end else if (k == NW'(N - 1)) state <= S_AGE;
          else begin
            k     <= k + 1'b1;
            state <= S_NEUR_RD;
          end
        end
        S_ROW: begin
          if (pv) acc[!bsel][pidx[NW-1:0]] <= acc_add(acc[!bsel][pidx[NW-1:0]], aa_rdata.w);
          if (sweep_done) begin
            sc    <= '0;
            state <= S_COL;
          end
        end
        S_COL: begin
          if (sweep_done) begin
            sc <= '0;
            if (k == NW'(N - 1)) state <= S_AGE;
            else begin
              k     <= k + 1'b1;
              state <= S_NEUR_RD;
            end
          end
        end
        S_AGE: begin
          if (sweep_done) state <= S_END;
        end
        S_END: begin
          t           <= t + 1'b1;
          bsel        <= !bsel;
          step_done   <= 1'b1;
          step_spikes <= spk;
          step_v      <= mon_v;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign t_now = t;
  assign busy  = (state != S_IDLE);

  // the neuron state FIFO always holds a state for the neuron being updated
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_NEUR_UPD |-> !sf_empty);
endmodule

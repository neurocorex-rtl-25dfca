// ncx_pkg: types and constants shared by the spiking-network emulator.
//
// Number formats follow the design description: neuron and synapse state use
// a signed fixed-point word of 1 sign bit, 7 integer bits and 10 fractional
// bits (18 bits, "Q7.10"); synaptic weights are signed 8-bit integers; STDP
// time traces are 8-bit step counters in which 8'hFF marks a disabled
// (negative) trace.
//
// The host byte protocol (command codes, frame layout, register map) is not
// specified by the original design; the codes below are this implementation's
// own choice and are documented in the README.
package ncx_pkg;

  // ---------------------------------------------------------------- numbers
  localparam int unsigned FIX_W    = 18;  // 1 sign + 7 integer + 10 fraction
  localparam int unsigned FIX_FRAC = 10;
  localparam int unsigned W_W      = 8;   // signed synaptic weight
  localparam int unsigned TR_W     = 8;   // STDP trace counter

  typedef logic signed [FIX_W-1:0] fix_t;
  typedef logic signed [W_W-1:0]   weight_t;
  typedef logic        [TR_W-1:0]  trace_t;

  localparam fix_t   FIX_MAX   = {1'b0, {(FIX_W-1){1'b1}}};
  localparam fix_t   FIX_MIN   = {1'b1, {(FIX_W-1){1'b0}}};
  localparam trace_t TRACE_OFF = 8'hFF;  // disabled ("negative") trace

  // Saturate a wide signed value into the Q7.10 range.
  function automatic fix_t sat_fix(input logic signed [39:0] x);
    if (x > 40'(signed'(FIX_MAX)))      return FIX_MAX;
    else if (x < 40'(signed'(FIX_MIN))) return FIX_MIN;
    else                                return fix_t'(x);
  endfunction

  // Saturate a wide signed value into the signed 8-bit weight range.
  function automatic weight_t sat_w(input logic signed [9:0] x);
    if (x > 10'sd127)       return 8'sd127;
    else if (x < -10'sd128) return -8'sd128;
    else                    return weight_t'(x);
  endfunction

  // ------------------------------------------------------ synapse entries
  // One synapse as held across the parallel memory banks of a matrix
  // (weight, enable_STDP, synaptic_traces, update_state, post trace).
  typedef struct packed {
    weight_t w;     // synaptic weight
    logic    en;    // enable_STDP mask bit (static, set by the host)
    trace_t  pre;   // synaptic (pre-synaptic) trace: steps since pre spike
    logic    upd;   // update_state: pre trace armed
    trace_t  post;  // post-synaptic trace: steps since post spike, FF = off
  } syn_entry_t;

  typedef struct packed {
    logic w;
    logic en;
    logic pre;
    logic upd;
    logic post;
  } syn_we_t;

  localparam int unsigned SYN_ENTRY_W = $bits(syn_entry_t);

  // Operation applied to one synapse entry by the learning rule.
  typedef enum logic [1:0] {
    STDP_NONE      = 2'd0,
    STDP_PRE_SPIKE = 2'd1,  // the synapse's source neuron spiked (row sweep)
    STDP_POST_SPIKE= 2'd2,  // the synapse's target neuron spiked (column sweep)
    STDP_AGE       = 2'd3   // end of time step: advance active traces
  } stdp_op_t;

  // --------------------------------------------------------- neuron state
  typedef struct packed {
    fix_t v_th;     // firing threshold
    fix_t leak;     // leak lambda subtracted each step
    logic [7:0] t_ref;  // refractory period in time steps
    fix_t v_reset;  // reset potential
  } nparam_t;

  typedef struct packed {
    fix_t v;            // membrane potential
    fix_t isyn;         // synaptic current
    logic [7:0] ref_cnt;  // remaining refractory steps
  } nstate_t;

  localparam int unsigned NSTATE_W = $bits(nstate_t);

  // ------------------------------------------------------ global settings
  typedef struct packed {
    fix_t       lambda_syn;  // synaptic current decay per step
    logic [7:0] dw_pos;      // potentiation step
    logic [7:0] dw_neg;      // depression step
    logic [7:0] t_pre;       // causal window in steps
    logic [7:0] t_post;      // acausal window in steps
    logic       stdp_en_aa;  // learning on W_AA
    logic       stdp_en_in;  // learning on W_in
    logic [3:0] w_shift;     // weight -> Q7.10 left shift
    logic [15:0] mon_neuron; // neuron whose membrane potential is streamed
  } gcfg_t;

  // Register indices of the global settings (host target TGT_GLOBAL).
  localparam logic [15:0] REG_LAMBDA_SYN = 16'd0;
  localparam logic [15:0] REG_DW_POS     = 16'd1;
  localparam logic [15:0] REG_DW_NEG     = 16'd2;
  localparam logic [15:0] REG_T_PRE      = 16'd3;
  localparam logic [15:0] REG_T_POST     = 16'd4;
  localparam logic [15:0] REG_STDP_EN    = 16'd5;  // bit0 W_AA, bit1 W_in
  localparam logic [15:0] REG_W_SHIFT    = 16'd6;
  localparam logic [15:0] REG_MON        = 16'd7;

  // Neuron parameter indices (host target TGT_NPARAM, column field).
  localparam logic [15:0] NP_V_TH    = 16'd0;
  localparam logic [15:0] NP_LEAK    = 16'd1;
  localparam logic [15:0] NP_T_REF   = 16'd2;
  localparam logic [15:0] NP_V_RESET = 16'd3;

  // ------------------------------------------------------- host protocol
  localparam logic [7:0] CMD_WRITE = 8'hA0;  // A0 tgt rH rL cH cL d2 d1 d0
  localparam logic [7:0] CMD_SPIKE = 8'hB0;  // B0 aH aL dt
  localparam logic [7:0] CMD_CTRL  = 8'hC0;  // C0 flags (bit0 run, bit1 clear)
  localparam logic [7:0] CMD_READ  = 8'hD0;  // D0 tgt rH rL cH cL
  localparam logic [7:0] RSP_READ  = 8'hD1;  // D1 d2 d1 d0
  localparam logic [7:0] RSP_STEP  = 8'hE0;  // E0 t bitmap... v2 v1 v0

  typedef enum logic [2:0] {
    TGT_WAA    = 3'd0,
    TGT_ENAA   = 3'd1,
    TGT_WIN    = 3'd2,
    TGT_ENIN   = 3'd3,
    TGT_NPARAM = 3'd4,
    TGT_GLOBAL = 3'd5
  } target_t;

  typedef struct packed {
    logic        write;  // 1 write, 0 read
    target_t     target;
    logic [15:0] row;
    logic [15:0] col;
    logic [23:0] data;
  } host_req_t;

  // 24-bit input spike word: 16-bit input address, 8-bit time difference
  // to the previous spike in time steps.
  typedef struct packed {
    logic [15:0] addr;
    logic [7:0]  dt;
  } spike_word_t;

endpackage

// stdp_rule: rectangular-window pair-based STDP applied to one synapse entry.
//
// The learning rule changes a weight by +dw_pos when the source (pre) neuron
// spiked 0 < dt < t_pre steps before the target (post) neuron, and by -dw_neg
// when the target spiked 0 < dt < t_post steps before the source. Timing is
// tracked with per-synapse step counters instead of spike times:
//
//  STDP_PRE_SPIKE  (source spiked; applied along the source's row)
//      if the post trace is active and 0 < post < t_post: depression, post
//      trace disabled; then pre trace := 0 and update_state := 1.
//  STDP_POST_SPIKE (target spiked; applied along the target's column)
//      if update_state = 1 and 0 < pre < t_pre: potentiation, pre trace
//      disabled (8'hFF) and update_state := 0; then post trace := 0.
//  STDP_AGE        (end of every time step; applied to every entry)
//      active traces count up by one; a pre trace reaching t_pre is disabled
//      and its update_state cleared, a post trace reaching t_post is disabled.
//
// A weight only changes when the matrix's learning switch `learn_en` and the
// synapse's enable_STDP bit are both set; traces are kept regardless.
// Weights saturate at -128 / +127. The checks `pre > 0` and `post > 0` exclude
// pairs in the same time step, as the rule's strict 0 < dt requires. Purely
// combinational; the network engine registers its result into the banks.
module stdp_rule
  import ncx_pkg::*;
(
  input  stdp_op_t   op,
  input  syn_entry_t cur,
  input  logic       learn_en,
  input  logic [7:0] dw_pos,
  input  logic [7:0] dw_neg,
  input  logic [7:0] t_pre,
  input  logic [7:0] t_post,
  output syn_entry_t nxt,
  output logic       potentiated,
  output logic       depressed
);
  logic       post_active, pre_active;
  logic [8:0] pre_inc, post_inc;
  logic       can_learn;

  assign can_learn   = learn_en && cur.en;
  assign post_active = (cur.post != TRACE_OFF);
  assign pre_active  = cur.upd && (cur.pre != TRACE_OFF);
  assign pre_inc     = {1'b0, cur.pre} + 9'd1;
  assign post_inc    = {1'b0, cur.post} + 9'd1;

  always_comb begin
    nxt         = cur;
    potentiated = 1'b0;
    depressed   = 1'b0;
    unique case (op)
      STDP_PRE_SPIKE: begin
        if (post_active && cur.post != '0 && cur.post < t_post) begin
          if (can_learn) begin
            nxt.w     = sat_w(10'(cur.w) - signed'({2'b00, dw_neg}));
            depressed = 1'b1;
          end
          nxt.post = TRACE_OFF;
        end
        nxt.pre  = '0;
        nxt.upd  = 1'b1;
      end
      STDP_POST_SPIKE: begin
        if (pre_active && cur.pre != '0 && cur.pre < t_pre) begin
          if (can_learn) begin
            nxt.w       = sat_w(10'(cur.w) + signed'({2'b00, dw_pos}));
            potentiated = 1'b1;
          end
          nxt.pre = TRACE_OFF;
          nxt.upd = 1'b0;
        end
        nxt.post = '0;
      end
      STDP_AGE: begin
        if (pre_active) begin
          if (pre_inc >= {1'b0, t_pre}) begin
            nxt.pre = TRACE_OFF;
            nxt.upd = 1'b0;
          end else nxt.pre = pre_inc[7:0];
        end
        if (post_active) begin
          if (post_inc >= {1'b0, t_post}) nxt.post = TRACE_OFF;
          else                            nxt.post = post_inc[7:0];
        end
      end
      default: ;
    endcase
  end
endmodule

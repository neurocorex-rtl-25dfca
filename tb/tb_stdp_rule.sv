// tb_stdp_rule: checks the learning rule on a synapse entry. Directed cases
// walk through the rectangular window of the rule (t_pre = 15, t_post = 30,
// +1 / -1 steps): a post spike 1..14 steps after a pre spike potentiates,
// at 0 or 15 steps it does not; a pre spike 1..29 steps after a post spike
// depresses; masked synapses keep their weight; weights saturate. Then random
// entries are compared with an independent integer model of the rule.
module tb_stdp_rule;
  import ncx_pkg::*;
  stdp_op_t   op;
  syn_entry_t cur, nxt;
  logic       learn_en, pot, dep;
  logic [7:0] dw_pos, dw_neg, t_pre, t_post;
  int checks = 0, failures = 0;

  stdp_rule dut (.op, .cur, .learn_en, .dw_pos, .dw_neg, .t_pre, .t_post,
                 .nxt, .potentiated(pot), .depressed(dep));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // independent model: returns expected entry and flags
  task automatic model(input int o, input int w, input int en, input int pre, input int upd,
                       input int post, input int le, input int dp, input int dn,
                       input int tp, input int tq,
                       output int ew, output int epre, output int eupd, output int epost,
                       output int ep, output int ed);
    ew = w; epre = pre; eupd = upd; epost = post; ep = 0; ed = 0;
    if (o == 1) begin            // pre spike
      if (post != 255 && post > 0 && post < tq) begin
        if (le && en) begin ew = w - dn; ed = 1; end
        epost = 255;
      end
      epre = 0; eupd = 1;
    end else if (o == 2) begin   // post spike
      if (upd == 1 && pre != 255 && pre > 0 && pre < tp) begin
        if (le && en) begin ew = w + dp; ep = 1; end
        epre = 255; eupd = 0;
      end
      epost = 0;
    end else if (o == 3) begin   // age
      if (upd == 1 && pre != 255) begin
        if (pre + 1 >= tp) begin epre = 255; eupd = 0; end else epre = pre + 1;
      end
      if (post != 255) begin
        if (post + 1 >= tq) epost = 255; else epost = post + 1;
      end
    end
    if (ew > 127) ew = 127;
    if (ew < -128) ew = -128;
  endtask

  task automatic check_one(input string what);
    int ew, epre, eupd, epost, ep, ed;
    #1;
    model(int'(op), int'(cur.w), int'(cur.en), int'(cur.pre), int'(cur.upd), int'(cur.post),
          int'(learn_en), int'(dw_pos), int'(dw_neg), int'(t_pre), int'(t_post),
          ew, epre, eupd, epost, ep, ed);
    checks++;
    if (int'(nxt.w) != ew || int'(nxt.pre) != epre || int'(nxt.upd) != eupd ||
        int'(nxt.post) != epost || int'(pot) != ep || int'(dep) != ed || nxt.en != cur.en) begin
      failures++;
      $display("%s: op %0d cur %p -> nxt %p pot %b dep %b; expected w %0d pre %0d upd %0d post %0d p %0d d %0d",
               what, op, cur, nxt, pot, dep, ew, epre, eupd, epost, ep, ed);
    end
  endtask

  initial begin
    dw_pos = 1; dw_neg = 1; t_pre = 15; t_post = 30; learn_en = 1;

    // causal pair: pre spike, age d steps, post spike
    for (int d = 0; d <= 16; d++) begin
      syn_entry_t e;
      e = '{w: 8'sd10, en: 1'b1, pre: TRACE_OFF, upd: 1'b0, post: TRACE_OFF};
      op = STDP_PRE_SPIKE; cur = e; #1; e = nxt;
      for (int s = 0; s < d; s++) begin op = STDP_AGE; cur = e; #1; e = nxt; end
      op = STDP_POST_SPIKE; cur = e; #1;
      checks++;
      if ((d >= 1 && d <= 14) != (nxt.w == 8'sd11)) begin
        failures++; $display("causal dt=%0d gave w=%0d", d, nxt.w);
      end
    end
    // acausal pair: post spike, age d steps, pre spike
    for (int d = 0; d <= 31; d++) begin
      syn_entry_t e;
      e = '{w: 8'sd10, en: 1'b1, pre: TRACE_OFF, upd: 1'b0, post: TRACE_OFF};
      op = STDP_POST_SPIKE; cur = e; #1; e = nxt;
      for (int s = 0; s < d; s++) begin op = STDP_AGE; cur = e; #1; e = nxt; end
      op = STDP_PRE_SPIKE; cur = e; #1;
      checks++;
      if ((d >= 1 && d <= 29) != (nxt.w == 8'sd9)) begin
        failures++; $display("acausal dt=%0d gave w=%0d", d, nxt.w);
      end
    end
    // mask bit off: weight fixed, traces still move
    op = STDP_POST_SPIKE; cur = '{w: 8'sd5, en: 1'b0, pre: 8'd3, upd: 1'b1, post: TRACE_OFF}; #1;
    checks++;
    if (nxt.w != 8'sd5 || pot || nxt.upd != 1'b0 || nxt.post != 8'd0) begin
      failures++; $display("masked synapse changed: %p", nxt);
    end
    // saturation
    dw_pos = 8'd10;
    op = STDP_POST_SPIKE; cur = '{w: 8'sd125, en: 1'b1, pre: 8'd3, upd: 1'b1, post: TRACE_OFF}; #1;
    checks++;
    if (nxt.w != 8'sd127) begin failures++; $display("no positive saturation: %0d", nxt.w); end
    dw_neg = 8'd200;
    op = STDP_PRE_SPIKE; cur = '{w: -8'sd100, en: 1'b1, pre: TRACE_OFF, upd: 1'b0, post: 8'd2}; #1;
    checks++;
    if (nxt.w != -8'sd128) begin failures++; $display("no negative saturation: %0d", nxt.w); end

    // random entries against the model
    for (int n = 0; n < 5000; n++) begin
      op       = stdp_op_t'($urandom % 4);
      cur.w    = weight_t'($urandom);
      cur.en   = 1'($urandom);
      cur.upd  = 1'($urandom);
      cur.pre  = ($urandom % 4 == 0) ? TRACE_OFF : 8'($urandom % 40);
      cur.post = ($urandom % 4 == 0) ? TRACE_OFF : 8'($urandom % 40);
      learn_en = ($urandom % 8) != 0;
      dw_pos   = 8'($urandom % 8);
      dw_neg   = 8'($urandom % 8);
      t_pre    = 8'($urandom % 40);
      t_post   = 8'($urandom % 40);
      check_one("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

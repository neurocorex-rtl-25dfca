// tb_lif_neuron: checks the neuron update against an independent model in
// real arithmetic (values in units of 2^-10). Directed cases: integration,
// leak, threshold crossing with reset and refractory period, current decay
// to zero from both signs, saturation; then random states and inputs.
module tb_lif_neuron;
  import ncx_pkg::*;
  nstate_t st, nxt;
  nparam_t p;
  fix_t    lambda_syn;
  logic signed [15:0] acc;
  logic [3:0] w_shift;
  logic spike;
  int checks = 0, failures = 0;

  lif_neuron #(.ACC_W(16)) dut (.st, .p, .lambda_syn, .acc, .w_shift, .nxt, .spike);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint clampf(longint x);
    if (x > 131071) return 131071;
    if (x < -131072) return -131072;
    return x;
  endfunction

  task automatic check(input string what);
    longint inj, idec, inew, v, ev, eref;
    bit es;
    #1;
    inj  = clampf(longint'(acc) * (longint'(1) << w_shift));
    idec = longint'(st.isyn);
    if (idec > 0) begin idec = idec - lambda_syn; if (idec < 0) idec = 0; end
    else if (idec < 0) begin idec = idec + lambda_syn; if (idec > 0) idec = 0; end
    inew = clampf(idec + inj);
    v    = clampf(longint'(st.v) - longint'(p.leak) + inew);
    es = 0;
    if (st.ref_cnt != 0) begin ev = p.v_reset; eref = st.ref_cnt - 1; end
    else if (v > p.v_th) begin es = 1; ev = p.v_reset; eref = p.t_ref; end
    else begin ev = v; eref = 0; end
    checks++;
    if (longint'(nxt.v) != ev || longint'(nxt.isyn) != inew || longint'(nxt.ref_cnt) != eref ||
        spike != es) begin
      failures++;
      $display("%s: st %p p %p acc %0d sh %0d -> v %0d i %0d r %0d s %b; expected v %0d i %0d r %0d s %b",
               what, st, p, acc, w_shift, nxt.v, nxt.isyn, nxt.ref_cnt, spike, ev, inew, eref, es);
    end
  endtask

  initial begin
    // 1.0 = 1024
    p = '{v_th: 18'sd102400, leak: 18'sd512, t_ref: 8'd3, v_reset: 18'sd0};
    lambda_syn = 18'sd256; w_shift = 4'd10;

    // integration of a weight of 7: I = 7.0, V = 0 - 0.5 + 7.0
    st = '{v: 0, isyn: 0, ref_cnt: 0}; acc = 16'sd7; check("integrate");
    checks++;
    if (nxt.v != 18'sd6656 || nxt.isyn != 18'sd7168) begin failures++; $display("integrate values"); end
    // decay of the current without input
    st = '{v: 18'sd1000, isyn: 18'sd300, ref_cnt: 0}; acc = 0; check("decay+");
    checks++; if (nxt.isyn != 18'sd44) begin failures++; $display("decay+ %0d", nxt.isyn); end
    st = '{v: 18'sd1000, isyn: -18'sd100, ref_cnt: 0}; acc = 0; check("decay- to zero");
    checks++; if (nxt.isyn != 0) begin failures++; $display("decay- %0d", nxt.isyn); end
    // crossing the threshold
    st = '{v: 18'sd100000, isyn: 18'sd5000, ref_cnt: 0}; acc = 0; check("fire");
    checks++; if (!spike || nxt.v != 0 || nxt.ref_cnt != 3) begin failures++; $display("no spike"); end
    // refractory: held at reset despite input
    st = '{v: 0, isyn: 0, ref_cnt: 2}; acc = 16'sd50; check("refractory");
    checks++; if (spike || nxt.v != 0 || nxt.ref_cnt != 1) begin failures++; $display("refractory"); end
    // saturation
    st = '{v: 18'sd130000, isyn: 18'sd130000, ref_cnt: 0};
    p.v_th = 18'sd131071; acc = 16'sd1000; check("saturate");
    checks++; if (nxt.isyn != 18'sd131071) begin failures++; $display("no saturation"); end

    for (int n = 0; n < 5000; n++) begin
      st.v       = fix_t'($urandom);
      st.isyn    = fix_t'($urandom);
      st.ref_cnt = ($urandom % 3 == 0) ? 8'($urandom % 5) : 8'd0;
      p.v_th     = fix_t'($urandom);
      p.leak     = fix_t'($urandom % 4096);
      p.t_ref    = 8'($urandom);
      p.v_reset  = fix_t'($urandom);
      lambda_syn = fix_t'($urandom % 4096);
      acc        = 16'($urandom);
      w_shift    = 4'($urandom);
      if (n % 2 == 0) acc = 16'(signed'(int'($urandom % 256) - 128));
      check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

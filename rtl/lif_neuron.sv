// lif_neuron: the single physical leaky integrate-and-fire neuron.
//
// The emulator has one neuron circuit that is time-multiplexed over all
// neurons of the network: the engine feeds it the stored state of one neuron,
// that neuron's parameters and the synaptic input it collected, and stores the
// result back. Per time step it computes, in Q7.10 fixed point with
// saturation:
//
//   inj      = acc <<< w_shift              (sum of 8-bit weights -> Q7.10)
//   I'       = decay(I) + inj               decay(I) moves I by lambda_syn
//                                           towards zero (current synapse)
//   V'       = V - leak + I'                (leaky integration)
//   spike    = V' > v_th                    then V' := v_reset and the
//                                           neuron is refractory for t_ref steps
//
// The update equations, the four neuron parameters (threshold, leak,
// refractory period, reset) and the number format are those of the design
// description. Its own choices: the current of this step (including input
// arriving in this step) enters V in the same step; the decay stops at zero
// rather than crossing it; during the refractory period V is held at v_reset
// while I keeps integrating; arithmetic saturates at the format limits.
// Purely combinational.
module lif_neuron
  import ncx_pkg::*;
#(
  parameter int unsigned ACC_W = 16
) (
  input  nstate_t                  st,
  input  nparam_t                  p,
  input  fix_t                     lambda_syn,
  input  logic signed [ACC_W-1:0]  acc,
  input  logic [3:0]               w_shift,
  output nstate_t                  nxt,
  output logic                     spike
);
  logic signed [39:0] inj_w, i_dec_w, i_new_w, v_new_w;
  fix_t inj, i_dec, i_new, v_int;

  always_comb begin
    inj_w = 40'(acc) <<< w_shift;
    inj   = sat_fix(inj_w);

    // synaptic current decays linearly towards zero
    if (st.isyn > 0) begin
      i_dec_w = 40'(st.isyn) - 40'(lambda_syn);
      i_dec   = (i_dec_w < 0) ? '0 : fix_t'(i_dec_w);
    end else if (st.isyn < 0) begin
      i_dec_w = 40'(st.isyn) + 40'(lambda_syn);
      i_dec   = (i_dec_w > 0) ? '0 : fix_t'(i_dec_w);
    end else begin
      i_dec_w = '0;
      i_dec   = '0;
    end

    i_new_w = 40'(i_dec) + 40'(inj);
    i_new   = sat_fix(i_new_w);

    v_new_w = 40'(st.v) - 40'(p.leak) + 40'(i_new);
    v_int   = sat_fix(v_new_w);

    nxt.isyn = i_new;
    spike    = 1'b0;
    if (st.ref_cnt != '0) begin
      nxt.v       = p.v_reset;
      nxt.ref_cnt = st.ref_cnt - 1'b1;
    end else if (v_int > p.v_th) begin
      spike       = 1'b1;
      nxt.v       = p.v_reset;
      nxt.ref_cnt = p.t_ref;
    end else begin
      nxt.v       = v_int;
      nxt.ref_cnt = '0;
    end
  end
endmodule

// config_regs: global synapse and learning-rule settings.
//
// Holds the settings that apply to the whole network and are loaded by the
// host before (or between) runs: the synaptic current decay lambda_syn, the
// STDP steps dw_pos / dw_neg, the windows t_pre / t_post, one learning switch
// per weight matrix, the shift that scales an 8-bit weight into the Q7.10
// current, and the index of the neuron whose membrane potential is streamed
// to the host. Written and read through the host request port (target
// TGT_GLOBAL, register index in `col`, value in the low bits of `data`);
// a read answers with `rsp_valid`/`rsp_data` one cycle after the request.
// Requests for other targets are not accepted here.
//
// Reset values: dw_pos = dw_neg = 1 and t_pre = 15, t_post = 30 steps, as
// drawn in the design's learning-window figure (+1 bit, -1 bit, 15 ms and
// 30 ms at 1 ms per step). The other reset values (lambda_syn = 0, learning
// off, w_shift = 10 so that a weight of 1 adds 1.0 to the current, monitored
// neuron 0) are this implementation's choice.
module config_regs
  import ncx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  input  host_req_t   req,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [23:0] rsp_data,
  output gcfg_t       cfg
);
  logic sel;
  assign sel       = req_valid && (req.target == TGT_GLOBAL);
  assign req_ready = sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.lambda_syn <= '0;
      cfg.dw_pos     <= 8'd1;
      cfg.dw_neg     <= 8'd1;
      cfg.t_pre      <= 8'd15;
      cfg.t_post     <= 8'd30;
      cfg.stdp_en_aa <= 1'b0;
      cfg.stdp_en_in <= 1'b0;
      cfg.w_shift    <= 4'd10;
      cfg.mon_neuron <= '0;
      rsp_valid      <= 1'b0;
      rsp_data       <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (sel && req.write) begin
        unique case (req.col)
          REG_LAMBDA_SYN: cfg.lambda_syn <= fix_t'(req.data[FIX_W-1:0]);
          REG_DW_POS:     cfg.dw_pos     <= req.data[7:0];
          REG_DW_NEG:     cfg.dw_neg     <= req.data[7:0];
          REG_T_PRE:      cfg.t_pre      <= req.data[7:0];
          REG_T_POST:     cfg.t_post     <= req.data[7:0];
          REG_STDP_EN:    {cfg.stdp_en_in, cfg.stdp_en_aa} <= req.data[1:0];
          REG_W_SHIFT:    cfg.w_shift    <= req.data[3:0];
          REG_MON:        cfg.mon_neuron <= req.data[15:0];
          default: ;
        endcase
      end else if (sel) begin
        rsp_valid <= 1'b1;
        unique case (req.col)
          REG_LAMBDA_SYN: rsp_data <= 24'(cfg.lambda_syn);
          REG_DW_POS:     rsp_data <= 24'(cfg.dw_pos);
          REG_DW_NEG:     rsp_data <= 24'(cfg.dw_neg);
          REG_T_PRE:      rsp_data <= 24'(cfg.t_pre);
          REG_T_POST:     rsp_data <= 24'(cfg.t_post);
          REG_STDP_EN:    rsp_data <= 24'({cfg.stdp_en_in, cfg.stdp_en_aa});
          REG_W_SHIFT:    rsp_data <= 24'(cfg.w_shift);
          REG_MON:        rsp_data <= 24'(cfg.mon_neuron);
          default:        rsp_data <= '0;
        endcase
      end
    end
  end
endmodule

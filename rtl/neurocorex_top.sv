// neurocorex_top: a spiking neural network emulator with on-chip STDP.
//
// The chip emulates a network of N = 100 leaky integrate-and-fire neurons with
// all-to-all recurrent connectivity (W_AA, N x N signed 8-bit weights) plus
// N_IN = 100 external inputs (W_in, N_IN x N), learning with a rectangular-
// window STDP rule on any subset of either matrix. A host PC talks to it over
// one 1 Mbit/s UART: it loads weights, masks and parameters, starts the run,
// streams input spikes in real time, receives the spike trains of all neurons
// and the membrane potential of one selected neuron every time step, and can
// read back the learnt weights.
//
// Data flow:
//   uart_rx -> host_decoder -+-> config_regs (global settings)
//                            +-> ncx_engine host port (weights, masks, params)
//                            +-> input spike FIFO -> spike_scheduler -> engine
//   timebase (100 kHz neuron rate, 1 ms step) -> engine
//   engine step record / read-back replies -> output_packer -> output FIFO
//                                            -> uart_tx
// Everything runs on the single 100 MHz clock `clk`; the 100 kHz neuron rate
// is a clock enable (the original uses a clock manager for a second clock).
// `rst_n` is an asynchronous active-low reset; after it the engine spends
// max(N, N_IN) * N clocks clearing its memories before it accepts requests.
// The status outputs are sticky flags for board LEDs, cleared by reset:
// input FIFO overflow, a time step that could not start on time, a step
// record dropped because the link was busy, a link error (UART framing,
// a byte lost while a request waited, an input address beyond N_IN) and an
// input spike released after its due step.
// From the design description: the blocks and their order (UART link, input
// spike FIFO, time-multiplexed neuron core with its BRAM matrices and state
// FIFO, output FIFO back to the PC), the sizes and the rates. This design's
// own: the byte protocol, the status flags, the run/clear control and the
// FIFO depths. The engine's event pulses and the timebase's neuron_tick are
// left unconnected here on purpose: they are observation points for
// simulation, which the lint reports as unused signals.
module neurocorex_top
  import ncx_pkg::*;
#(
  parameter int unsigned N              = 100,
  parameter int unsigned N_IN           = 100,
  parameter int unsigned CLKS_PER_BIT   = 100,   // 100 MHz / 1 Mbit/s
  parameter int unsigned NEURON_CLK_DIV = 1000,  // 100 MHz / 100 kHz
  parameter int unsigned IN_FIFO_DEPTH  = 1024,
  parameter int unsigned OUT_FIFO_DEPTH = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic uart_rx_i,
  output logic uart_tx_o,
  output logic running,
  output logic in_fifo_overflow,
  output logic step_overrun,
  output logic record_lost,
  output logic link_error,
  output logic late_spike
);
  // ---------------------------------------------------------- host link in
  logic       rx_valid, rx_err;
  logic [7:0] rx_data;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst_n, .rx(uart_rx_i), .valid(rx_valid), .data(rx_data), .frame_err(rx_err));

  logic        req_valid, req_ready, dec_drop;
  host_req_t   req;
  logic        spk_valid;
  spike_word_t spk_word;
  logic        run, clear;

  host_decoder u_dec (
    .clk, .rst_n, .in_valid(rx_valid), .in_data(rx_data),
    .req_valid, .req, .req_ready,
    .spike_valid(spk_valid), .spike(spk_word),
    .run, .clear, .drop(dec_drop));

  gcfg_t       cfg;
  logic        cr_ready, cr_rsp_valid;
  logic [23:0] cr_rsp_data;

  config_regs u_cfg (
    .clk, .rst_n, .req_valid, .req, .req_ready(cr_ready),
    .rsp_valid(cr_rsp_valid), .rsp_data(cr_rsp_data), .cfg);

  // ---------------------------------------------------- input spike FIFO
  logic        inf_empty, inf_full, inf_ovf, inf_pop;
  logic [23:0] inf_head;

  sync_fifo #(.WIDTH(24), .DEPTH(IN_FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .clr(clear),
    .wr_en(spk_valid), .wr_data(spk_word),
    .rd_en(inf_pop), .rd_data(inf_head),
    .empty(inf_empty), .full(inf_full), .overflow(inf_ovf), .count());

  logic        sch_valid, sch_ready, sch_late;
  logic [15:0] sch_addr;
  logic [31:0] t_now;

  spike_scheduler u_sched (
    .clk, .rst_n, .restart(clear), .t_now,
    .fifo_empty(inf_empty), .fifo_head(spike_word_t'(inf_head)), .fifo_pop(inf_pop),
    .out_valid(sch_valid), .out_addr(sch_addr), .out_ready(sch_ready), .late(sch_late));

  // ------------------------------------------------------------ time base
  logic neuron_tick, step_tick;

  timebase #(.NEURON_CLK_DIV(NEURON_CLK_DIV), .N(N)) u_tb (
    .clk, .rst_n, .run, .neuron_tick, .step_tick);

  // --------------------------------------------------------------- engine
  logic          eng_ready, eng_rsp_valid;
  logic [23:0]   eng_rsp_data;
  logic          step_done, eng_busy;
  logic [N-1:0]  step_spikes;
  fix_t          step_v;
  logic ev_in_spike, ev_bad_addr, ev_spike, ev_refractory, ev_pot_aa, ev_dep_aa;
  logic ev_pot_in, ev_dep_in, ev_expire, ev_overrun;

  ncx_engine #(.N(N), .N_IN(N_IN)) u_engine (
    .clk, .rst_n, .run, .clear, .step_tick, .cfg,
    .hreq_valid(req_valid), .hreq(req), .hreq_ready(eng_ready),
    .hrsp_valid(eng_rsp_valid), .hrsp_data(eng_rsp_data),
    .in_valid(sch_valid), .in_addr(sch_addr), .in_ready(sch_ready),
    .t_now, .step_done, .step_spikes, .step_v, .busy(eng_busy),
    .ev_in_spike, .ev_bad_addr, .ev_spike, .ev_refractory,
    .ev_pot_aa, .ev_dep_aa, .ev_pot_in, .ev_dep_in, .ev_expire, .ev_overrun);

  assign req_ready = cr_ready | eng_ready;

  // ------------------------------------------------------- host link out
  logic       pk_valid, pk_ready, pk_lost;
  logic [7:0] pk_data;

  output_packer #(.N(N)) u_pack (
    .clk, .rst_n,
    .step_valid(step_done), .step_spikes, .step_t(t_now[7:0] - 8'd1), .step_v,
    .rsp_valid(cr_rsp_valid | eng_rsp_valid),
    .rsp_data(cr_rsp_valid ? cr_rsp_data : eng_rsp_data),
    .out_valid(pk_valid), .out_data(pk_data), .out_ready(pk_ready), .lost(pk_lost));

  logic       of_empty, of_full, tx_ready;
  logic [7:0] of_head;

  sync_fifo #(.WIDTH(8), .DEPTH(OUT_FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .clr(1'b0),
    .wr_en(pk_valid && pk_ready), .wr_data(pk_data),
    .rd_en(tx_ready && !of_empty), .rd_data(of_head),
    .empty(of_empty), .full(of_full), .overflow(), .count());

  assign pk_ready = !of_full;

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk, .rst_n, .valid(!of_empty), .data(of_head), .ready(tx_ready), .tx(uart_tx_o));

  // ------------------------------------------------------------- status
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running          <= 1'b0;
      in_fifo_overflow <= 1'b0;
      step_overrun     <= 1'b0;
      record_lost      <= 1'b0;
      link_error       <= 1'b0;
      late_spike       <= 1'b0;
    end else begin
      running <= run;
      if (inf_ovf)    in_fifo_overflow <= 1'b1;
      if (ev_overrun) step_overrun     <= 1'b1;
      if (pk_lost)    record_lost      <= 1'b1;
      if (rx_err || dec_drop || ev_bad_addr) link_error <= 1'b1;
      if (sch_late)   late_spike       <= 1'b1;
    end
  end
endmodule

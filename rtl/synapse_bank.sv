// synapse_bank: the memory banks of one synapse matrix.
//
// Each synapse matrix of the emulator (the recurrent all-to-all matrix W_AA
// and the feed-forward input matrix W_in) is kept as a set of separate block
// RAM banks of identical shape, all in row-major order (row = source neuron,
// column = target neuron), as in the design's description of its internal
// variables:
//   weight    signed 8 bit  W_AA / W_in
//   enable    1 bit         enable_STDP mask (which synapses may learn)
//   pre       8 bit         synaptic_traces (steps since the source spiked)
//   upd       1 bit         update_state (pre trace armed)
//   post      8 bit         post-synaptic trace (steps since the target spiked)
// The post-synaptic trace is mentioned but not drawn in the original; holding
// it per synapse, like the pre trace, is this implementation's choice.
//
// All banks share one read address and one write address, so a whole synapse
// entry is read in one cycle (registered, one cycle latency) and written back
// in one cycle; `we` selects which banks a write touches, so the host can
// change a weight without disturbing the traces.
module synapse_bank
  import ncx_pkg::*;
#(
  parameter int unsigned ROWS = 100,
  parameter int unsigned COLS = 100,
  localparam int unsigned DEPTH = ROWS * COLS,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic       clk,
  input  syn_we_t    we,
  input  logic [AW-1:0] waddr,
  input  syn_entry_t wdata,
  input  logic       re,
  input  logic [AW-1:0] raddr,
  output syn_entry_t rdata
);
  sdp_ram #(.WIDTH(W_W),  .DEPTH(DEPTH)) u_weight (
    .clk, .we(we.w),    .waddr, .wdata(wdata.w),    .re, .raddr, .rdata(rdata.w));
  sdp_ram #(.WIDTH(1),    .DEPTH(DEPTH)) u_enable (
    .clk, .we(we.en),   .waddr, .wdata(wdata.en),   .re, .raddr, .rdata(rdata.en));
  sdp_ram #(.WIDTH(TR_W), .DEPTH(DEPTH)) u_pre_trace (
    .clk, .we(we.pre),  .waddr, .wdata(wdata.pre),  .re, .raddr, .rdata(rdata.pre));
  sdp_ram #(.WIDTH(1),    .DEPTH(DEPTH)) u_update_state (
    .clk, .we(we.upd),  .waddr, .wdata(wdata.upd),  .re, .raddr, .rdata(rdata.upd));
  sdp_ram #(.WIDTH(TR_W), .DEPTH(DEPTH)) u_post_trace (
    .clk, .we(we.post), .waddr, .wdata(wdata.post), .re, .raddr, .rdata(rdata.post));
endmodule

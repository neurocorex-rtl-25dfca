// sync_fifo: single-clock first-in first-out buffer.
//
// The emulator uses FIFOs in three places: the input-spike buffer between the
// host link and the network (it must accept writes while being read, so that
// long spike trains stream in while the network consumes them), the
// circulating store of neuron states for the time-multiplexed neuron, and the
// byte buffer in front of the UART transmitter. All three are this module.
//
// Interface: show-ahead (first-word fall-through) read: `rd_data` always holds
// the oldest entry while `empty` is low, and `rd_en` removes it. `wr_en`
// appends `wr_data` unless the FIFO is full; a write while full is dropped and
// `overflow` pulses. A read and a write in the same cycle are both performed,
// also when the FIFO is full (the read frees the place). `clr` empties it.
// DEPTH need not be a power of two. `count` gives the fill level.
module sync_fifo #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic             overflow,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  logic do_rd, do_wr;
  assign empty   = (count == 0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_rd   = rd_en && !empty;
  assign do_wr   = wr_en && (!full || do_rd);
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else if (clr) begin
      wr_ptr   <= '0;
      rd_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= wr_en && !do_wr;
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      count <= count + ($clog2(DEPTH+1))'(do_wr) - ($clog2(DEPTH+1))'(do_rd);
    end
  end

  // the fill level never leaves 0..DEPTH
  assert property (@(posedge clk) disable iff (!rst_n) count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule

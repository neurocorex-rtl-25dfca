// spike_scheduler: releases buffered input spikes at their time step.
//
// The host sends input spikes with the time difference to the previous spike
// rather than absolute times, and they wait in the input spike FIFO. This
// block keeps the absolute time of the last released spike (`base`) and adds
// the time difference of the word at the FIFO head to obtain its due step.
// While the network's step counter `t_now` has reached that step the spike is
// offered to the engine (`out_valid`, `out_addr`); `out_ready` takes it, pops
// the FIFO and moves `base` to its due step. Several spikes of one step are
// sent with a difference of 0. A spike that is released after its due step
// (the host sent it too late) pulses `late`. `restart` sets `base` back to 0
// together with the engine's step counter.
// Comparing the head's timestamp with an internal time counter follows the
// design description; the 32-bit counters are this implementation's choice.
module spike_scheduler
  import ncx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        restart,
  input  logic [31:0] t_now,
  input  logic        fifo_empty,
  input  spike_word_t fifo_head,
  output logic        fifo_pop,
  output logic        out_valid,
  output logic [15:0] out_addr,
  input  logic        out_ready,
  output logic        late
);
  logic [31:0] base, due;

  assign due       = base + 32'(fifo_head.dt);
  assign out_valid = !fifo_empty && (due <= t_now);
  assign out_addr  = fifo_head.addr;
  assign fifo_pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0;
      late <= 1'b0;
    end else if (restart) begin
      base <= '0;
      late <= 1'b0;
    end else begin
      late <= fifo_pop && (due < t_now);
      if (fifo_pop) base <= due;
    end
  end
endmodule

// timebase: neuron-update rate and time-step strobes.
//
// The emulator runs from one 100 MHz clock. The design description updates
// one neuron per cycle of a 100 kHz neuron clock, so that a network of N = 100
// neurons advances one 1 ms time step in biological real time. Here the
// 100 kHz rate is a one-cycle enable `neuron_tick` every NEURON_CLK_DIV = 1000
// system clocks instead of a second clock domain, and every N neuron ticks a
// `step_tick` starts a time step of the network engine. Both counters run
// while `run` is high and restart from zero when it is low. Changing
// NEURON_CLK_DIV changes the emulation speed (e.g. 100 gives 10x real time).
module timebase #(
  parameter int unsigned NEURON_CLK_DIV = 1000,
  parameter int unsigned N              = 100
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  output logic neuron_tick,
  output logic step_tick
);
  localparam int unsigned DW = $clog2(NEURON_CLK_DIV) + 1;
  localparam int unsigned NW = $clog2(N) + 1;

  logic [DW-1:0] div;
  logic [NW-1:0] ncnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div         <= '0;
      ncnt        <= '0;
      neuron_tick <= 1'b0;
      step_tick   <= 1'b0;
    end else if (!run) begin
      div         <= '0;
      ncnt        <= '0;
      neuron_tick <= 1'b0;
      step_tick   <= 1'b0;
    end else begin
      neuron_tick <= 1'b0;
      step_tick   <= 1'b0;
      if (div == DW'(NEURON_CLK_DIV - 1)) begin
        div         <= '0;
        neuron_tick <= 1'b1;
        if (ncnt == NW'(N - 1)) begin
          ncnt      <= '0;
          step_tick <= 1'b1;
        end else ncnt <= ncnt + 1'b1;
      end else div <= div + 1'b1;
    end
  end
endmodule

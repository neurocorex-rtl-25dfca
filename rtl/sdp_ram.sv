// sdp_ram: simple dual-port block RAM (one write port, one read port).
//
// All large state of the emulator (weight matrices, STDP masks and traces,
// neuron parameters) lives in block RAM, which allows one access per port per
// clock. This is the generic bank: a write port and a read port on the same
// clock, with a registered read (data appears one cycle after `re`), which is
// what FPGA block RAM provides. A read and a write of the same address in one
// cycle return the old contents. Contents are not reset; the network engine
// clears them with an initialisation sweep after reset.
module sdp_ram #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 10000
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

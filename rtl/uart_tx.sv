// uart_tx: 8N1 UART transmitter for the link back to the host.
//
// Spike trains, the monitored membrane potential and weight read-back replies
// leave the chip through this transmitter at 1 Mbit/s (CLKS_PER_BIT = 100
// cycles of the 100 MHz clock, as in the design description). A byte is
// accepted with a valid/ready handshake; `ready` is high only while the
// transmitter is idle, so a byte is taken in the cycle both are high and the
// line goes low (start bit) on the next clock. A frame takes 10 bit times:
// start bit, 8 data bits LSB first, one stop bit. Framing is this
// implementation's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = 100
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic [7:0] data,
  output logic       ready,
  output logic       tx
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT) + 1;

  logic          busy;
  logic [CW-1:0] cnt;
  logic [3:0]    bitn;
  logic [9:0]    shreg;

  assign ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt   <= '0;
      bitn  <= '0;
      shreg <= '1;
      tx    <= 1'b1;
    end else if (!busy) begin
      tx <= 1'b1;
      if (valid) begin
        busy  <= 1'b1;
        shreg <= {1'b1, data, 1'b0};
        cnt   <= '0;
        bitn  <= '0;
        tx    <= 1'b0;  // start bit
      end
    end else begin
      if (cnt == CW'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (bitn == 4'd9) begin
          busy <= 1'b0;
          tx   <= 1'b1;
        end else begin
          bitn  <= bitn + 1'b1;
          tx    <= shreg[bitn + 4'd1];
        end
      end else cnt <= cnt + 1'b1;
    end
  end
endmodule

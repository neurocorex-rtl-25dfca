// uart_rx: 8N1 UART receiver for the host link.
//
// The host sends configuration, commands and input spikes at 1 Mbit/s; with
// the 100 MHz system clock one bit lasts CLKS_PER_BIT = 100 cycles (both
// numbers from the design description). The line is synchronised through two
// flip-flops, a falling edge starts a frame, every bit is sampled in its
// middle and the byte is presented on `data` with a one-cycle `valid` pulse
// at the middle of the stop bit. A frame whose stop bit is low is dropped and
// flagged on `frame_err`. Framing (8 data bits, LSB first, no parity, one
// stop bit) is this implementation's choice; the original only gives the rate.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 100
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);
  localparam int unsigned CW = $clog2(CLKS_PER_BIT) + 1;

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_t;
  state_t state;

  logic [1:0]    sync;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic [7:0]    shreg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync      <= 2'b11;
      state     <= S_IDLE;
      cnt       <= '0;
      bitn      <= '0;
      shreg     <= '0;
      valid     <= 1'b0;
      data      <= '0;
      frame_err <= 1'b0;
    end else begin
      sync      <= {sync[0], rx};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (state)
        S_IDLE: if (!sync[1]) begin
          state <= S_START;
          cnt   <= '0;
        end
        S_START: begin
          // check the start bit again half a bit later
          if (cnt == CW'(CLKS_PER_BIT/2 - 1)) begin
            cnt   <= '0;
            bitn  <= '0;
            state <= sync[1] ? S_IDLE : S_DATA;
          end else cnt <= cnt + 1'b1;
        end
        S_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {sync[1], shreg[7:1]};
            if (bitn == 3'd7) state <= S_STOP;
            bitn  <= bitn + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            if (sync[1]) begin
              valid <= 1'b1;
              data  <= shreg;
            end else frame_err <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
      endcase
    end
  end
endmodule

// output_packer: serialises recorded activity and replies for the host.
//
// The spike trains of all neurons and the membrane potential of one selected
// neuron are streamed to the host as the network runs; they are not stored on
// chip but pass through the output FIFO to the UART transmitter. At the end of
// every time step the engine hands over the step's spike vector, the step
// number and the monitored potential; this block turns them into the packet
//
//   E0  t[7:0]  s[7:0] s[15:8] ... (ceil(N/8) bytes, bit i = neuron i)  v2 v1 v0
//
// (v = the 18-bit Q7.10 potential sign-extended to 24 bits, MSB first) and
// writes it byte by byte into the FIFO while `out_ready` (FIFO not full).
// A read-back reply `rsp_data` becomes the packet D1 d2 d1 d0; a reply waits
// for the current packet to finish. A step that ends while the previous
// packet is still being written is not recorded and pulses `lost`.
// The packet layout is this implementation's own.
module output_packer
  import ncx_pkg::*;
#(
  parameter int unsigned N = 100
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step_valid,
  input  logic [N-1:0] step_spikes,
  input  logic [7:0]   step_t,
  input  fix_t         step_v,
  input  logic         rsp_valid,
  input  logic [23:0]  rsp_data,
  output logic         out_valid,
  output logic [7:0]   out_data,
  input  logic         out_ready,
  output logic         lost
);
  localparam int unsigned NB  = (N + 7) / 8;
  localparam int unsigned LEN = NB + 5;  // header, t, bitmap, 3 bytes v
  localparam int unsigned IW  = $clog2(LEN + 1);

  logic [NB*8-1:0] spk_q;
  logic [7:0]      t_q;
  logic [23:0]     v_q;
  logic            step_busy;
  logic [IW-1:0]   pos;
  logic            rsp_pend, rsp_busy;
  logic [23:0]     rsp_q;
  logic [1:0]      rpos;

  always_comb begin
    out_valid = step_busy || rsp_busy;
    out_data  = '0;
    if (rsp_busy) begin
      unique case (rpos)
        2'd0: out_data = RSP_READ;
        2'd1: out_data = rsp_q[23:16];
        2'd2: out_data = rsp_q[15:8];
        default: out_data = rsp_q[7:0];
      endcase
    end else if (step_busy) begin
      if (pos == 0)                    out_data = RSP_STEP;
      else if (pos == 1)               out_data = t_q;
      else if (pos < IW'(NB + 2))      out_data = spk_q[8*(pos-2) +: 8];
      else if (pos == IW'(NB + 2))     out_data = v_q[23:16];
      else if (pos == IW'(NB + 3))     out_data = v_q[15:8];
      else                             out_data = v_q[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      spk_q <= '0; t_q <= '0; v_q <= '0;
      step_busy <= 1'b0; pos <= '0;
      rsp_pend <= 1'b0; rsp_busy <= 1'b0; rsp_q <= '0; rpos <= '0;
      lost <= 1'b0;
    end else begin
      lost <= 1'b0;
      if (rsp_valid) begin
        rsp_pend <= 1'b1;
        rsp_q    <= rsp_data;
      end
      if (step_valid) begin
        if (step_busy) lost <= 1'b1;
        else begin
          step_busy <= 1'b1;
          pos       <= '0;
          spk_q     <= (NB*8)'(step_spikes);
          t_q       <= step_t;
          v_q       <= 24'(step_v);
        end
      end
      // a reply starts only between step packets
      if (rsp_pend && !rsp_busy && !step_busy && !step_valid) begin
        rsp_busy <= 1'b1;
        rsp_pend <= rsp_valid;
        rpos     <= '0;
      end
      if (out_valid && out_ready) begin
        if (rsp_busy) begin
          if (rpos == 2'd3) rsp_busy <= 1'b0;
          rpos <= rpos + 1'b1;
        end else begin
          if (pos == IW'(LEN - 1)) step_busy <= 1'b0;
          pos <= pos + 1'b1;
        end
      end
    end
  end
endmodule

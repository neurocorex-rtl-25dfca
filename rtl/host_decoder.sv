// host_decoder: turns the byte stream from the host into requests.
//
// Everything the host sends (network weights, STDP masks, neuron, synapse and
// learning parameters, run control and the real-time input spikes) arrives on
// the one UART link. This decoder recognises four frame types, each opened by
// a command byte (values in ncx_pkg):
//
//   A0 tgt rowH rowL colH colL d2 d1 d0   write (9 bytes)
//   D0 tgt rowH rowL colH colL            read-back request (6 bytes)
//   B0 addrH addrL dt                     input spike word (4 bytes)
//   C0 flags                              control: bit0 run, bit1 clear
//
// A write or read becomes a host_req_t held on `req` with `req_valid` until
// `req_ready`; bytes arriving meanwhile are dropped and counted on `drop`
// (the host waits for the reply of a read and paces writes, so this does not
// happen in normal use). A spike frame becomes the 24-bit spike word of the
// design description (16-bit address, 8-bit time difference) with a one-cycle
// `spike_valid`. A control frame sets the `run` level and pulses `clear`.
// An unknown command byte is ignored, which lets the host resynchronise.
// The frame layout is this implementation's own; the original gives only the
// spike word format.
module host_decoder
  import ncx_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [7:0]  in_data,
  output logic        req_valid,
  output host_req_t   req,
  input  logic        req_ready,
  output logic        spike_valid,
  output spike_word_t spike,
  output logic        run,
  output logic        clear,
  output logic        drop
);
  logic [7:0] cmd;
  logic [3:0] idx;           // payload byte index
  logic [7:0] buf_q [8];     // payload bytes
  logic       in_frame;

  function automatic logic [3:0] frame_len(input logic [7:0] c);
    unique case (c)
      CMD_WRITE: return 4'd8;
      CMD_READ:  return 4'd5;
      CMD_SPIKE: return 4'd3;
      CMD_CTRL:  return 4'd1;
      default:   return 4'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd         <= '0;
      idx         <= '0;
      in_frame    <= 1'b0;
      req_valid   <= 1'b0;
      req         <= '0;
      spike_valid <= 1'b0;
      spike       <= '0;
      run         <= 1'b0;
      clear       <= 1'b0;
      drop        <= 1'b0;
      for (int i = 0; i < 8; i++) buf_q[i] <= '0;
    end else begin
      spike_valid <= 1'b0;
      clear       <= 1'b0;
      drop        <= 1'b0;
      if (req_valid && req_ready) req_valid <= 1'b0;

      if (in_valid) begin
        if (req_valid && !req_ready) begin
          drop <= 1'b1;
        end else if (!in_frame) begin
          if (frame_len(in_data) != 0) begin
            cmd      <= in_data;
            idx      <= '0;
            in_frame <= 1'b1;
          end
        end else begin
          buf_q[idx[2:0]] <= in_data;
          if (idx + 1'b1 == frame_len(cmd)) begin
            in_frame <= 1'b0;
            unique case (cmd)
              CMD_WRITE, CMD_READ: begin
                req_valid  <= 1'b1;
                req.write  <= (cmd == CMD_WRITE);
                req.target <= target_t'(buf_q[0][2:0]);
                req.row    <= {buf_q[1], buf_q[2]};
                req.col    <= {buf_q[3], (cmd == CMD_READ) ? in_data : buf_q[4]};
                req.data   <= (cmd == CMD_WRITE) ? {buf_q[5], buf_q[6], in_data} : '0;
              end
              CMD_SPIKE: begin
                spike_valid <= 1'b1;
                spike.addr  <= {buf_q[0], buf_q[1]};
                spike.dt    <= in_data;
              end
              CMD_CTRL: begin
                run   <= in_data[0];
                clear <= in_data[1];
              end
              default: ;
            endcase
          end else idx <= idx + 1'b1;
        end
      end
    end
  end

  // a request stays stable until it is accepted
  assert property (@(posedge clk) disable iff (!rst_n)
                   req_valid && !req_ready |=> req_valid && $stable(req));
endmodule

// uart_tx: result transmitter (UART_Tx).
//
// Collects the spike vectors that the SNN array marks valid and sends them to
// the host as 8N1 serial frames. Every valid vector is ORed into a pending
// register; whenever the serialiser is idle and something is pending, the
// pending vector is moved into the send buffer (and pending is cleared) and
// sent as ceil(N/8) bytes, byte 0 = neurons 0..7, LSB first. Spikes that
// arrive while a frame is on the line are therefore merged into the next
// frame instead of being lost. Bit timing comes from the clk_div tick: the
// transmitter pulses tick_clr when it starts a frame so that the start bit
// lasts one full bit period.
//
// Interface: data[N-1:0]/valid from the SNN array, bit_tick from clk_div,
// tick_clr to clk_div, tx (idle high), busy (high while a frame is sent).
// Timing: the start bit begins the cycle after the load; each bit lasts one
// tick period; a frame of NB bytes lasts 10*NB bit periods.
//
// From the paper: collecting parallel data from the SNN module, the valid
// gating and the serial format. Own choices: the frame layout and the OR-merge
// of vectors that arrive while busy.
module uart_tx #(
  parameter int unsigned N = snn_pkg::DEF_N
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] data,
  input  logic         valid,
  input  logic         bit_tick,
  output logic         tick_clr,
  output logic         tx,
  output logic         busy
);
  import snn_pkg::*;

  localparam int unsigned NB = bytes_for_bits(N);
  localparam int unsigned KW = $clog2(NB + 1);

  logic [N-1:0]      pending;
  logic [N-1:0]      pend_next;
  logic [NB*8-1:0]   pend_pad;
  logic [NB*8-1:0]   frame_buf;
  logic [9:0]        sh;
  logic [3:0]        bit_cnt;
  logic [KW-1:0]     bytes_left;
  logic              load;

  assign pend_next = pending | (valid ? data : '0);
  assign pend_pad  = (NB*8)'(pend_next);
  assign load      = !busy && (pend_next != '0);
  assign tick_clr  = load;
  assign tx        = busy ? sh[0] : 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending    <= '0;
      frame_buf  <= '0;
      sh         <= '1;
      bit_cnt    <= '0;
      bytes_left <= '0;
      busy       <= 1'b0;
    end else if (load) begin
      pending    <= '0;
      frame_buf  <= pend_pad >> 8;
      sh         <= {1'b1, pend_pad[7:0], 1'b0};
      bit_cnt    <= '0;
      bytes_left <= KW'(NB - 1);
      busy       <= 1'b1;
    end else begin
      pending <= pend_next;
      if (busy && bit_tick) begin
        if (bit_cnt == 4'd9) begin
          if (bytes_left == '0) begin
            busy <= 1'b0;
            sh   <= '1;
          end else begin
            sh         <= {1'b1, frame_buf[7:0], 1'b0};
            frame_buf  <= frame_buf >> 8;
            bytes_left <= bytes_left - 1'b1;
            bit_cnt    <= '0;
          end
        end else begin
          sh      <= {1'b1, sh[9:1]};
          bit_cnt <= bit_cnt + 1'b1;
        end
      end
    end
  end

  // A byte frame is start + 8 data + stop: the bit counter never passes 9,
  // and the line is idle high whenever nothing is being sent.
  a_bit_cnt: assert property (@(posedge clk) disable iff (!rst_n) busy |-> bit_cnt <= 4'd9);
  a_idle_hi: assert property (@(posedge clk) disable iff (!rst_n) !busy |-> tx);

endmodule

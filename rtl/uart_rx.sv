// uart_rx: 8N1 UART receiver (UART_Rx of the processor).
//
// Turns the host's serial line into bytes. The line is passed through a
// two-flop synchroniser; a falling edge starts a frame, the start bit is
// re-checked half a bit later, and each of the 8 data bits (LSB first) and the
// stop bit are sampled in the middle of their bit period. A byte is presented
// on `data` with a one-cycle `valid` strobe only if the stop bit reads 1, so a
// frame with a framing error is dropped: this is how "each byte is validated"
// is realised here.
//
// Interface: clk, rst_n (active-low, synchronous), rx (idle high),
// data[7:0], valid. Timing: valid rises about 9.5 bit periods after the start
// edge, plus the 2-cycle synchroniser delay.
//
// From the paper: the function (serial to parallel bytes, byte validation,
// 9600 baud at 100 MHz). Own choices: 8N1 framing, mid-bit sampling,
// the synchroniser and dropping frames whose stop bit is 0.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = snn_pkg::clks_per_bit(snn_pkg::DEF_CLK_HZ, snn_pkg::DEF_BAUD)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] data,
  output logic       valid
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  state_e          state;
  logic [CW-1:0]   cnt;
  logic [2:0]      bit_idx;
  logic [7:0]      shreg;
  logic            rx_m, rx_s;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rx_m <= 1'b1;
      rx_s <= 1'b1;
    end else begin
      rx_m <= rx;
      rx_s <= rx_m;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      bit_idx <= '0;
      shreg   <= '0;
      data    <= '0;
      valid   <= 1'b0;
    end else begin
      valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          cnt     <= '0;
          bit_idx <= '0;
          if (!rx_s) state <= S_START;
        end
        S_START: begin
          if (cnt == CW'((CLKS_PER_BIT - 1) / 2)) begin
            cnt   <= '0;
            state <= rx_s ? S_IDLE : S_DATA;   // glitch: back to idle
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {rx_s, shreg[7:1]};
            if (bit_idx == 3'd7) state <= S_STOP;
            bit_idx <= bit_idx + 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            if (rx_s) begin
              data  <= shreg;
              valid <= 1'b1;
            end
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

// register_bank: turns the received byte stream into the SNN configuration.
//
// Every byte that the UART receiver validates is written to the next register
// of a fixed update layout, in this order:
//   1. connection list: N rows of ceil(N/8) bytes; row n holds
//      connection_list[n][m] for all m (byte b carries m = 8b..8b+7, LSB
//      first), 1 meaning "the output of neuron n drives an input of m";
//   2. threshold list: N bytes, threshold[0] first;
//   3. weight list:    N bytes, weight[0] first;
//   4. impulse vector: ceil(N/8) bytes, one input-spike bit per neuron.
// Bits past N in the last byte of a row are ignored. After the last impulse
// byte has been stored, impulse_valid is high for one cycle and the byte
// counter wraps, so the next byte starts a new update. One update is
// N*ceil(N/8) + 2N + ceil(N/8) bytes: 898 for N = 74, 4 for N = 1.
//
// The connection list is held per destination neuron: conn_in[m][n] is
// connection_list[n][m], so conn_in[m] is the connectivity pattern that
// neuron m receives from the central list. A row byte of source n is written
// into bit n of the patterns of neurons 8b..8b+7.
//
// Interface: rx_data/rx_valid from the UART receiver; the register outputs
// are plain flops that feed the SNN array directly. Timing: a register is
// updated at the clock edge after its byte's rx_valid; impulse_valid is high
// in the cycle after the last byte's rx_valid.
//
// From the paper: the four register groups and their sizes (the per-group
// byte counts). Own choices: the order of the groups, the bit order inside a
// byte, the absence of any resynchronisation (the host sends whole
// updates after reset), and resetting every threshold to 255 so that no
// neuron fires spontaneously before it has been configured (a threshold of 0
// would satisfy v >= threshold every cycle).
module register_bank #(
  parameter int unsigned N = snn_pkg::DEF_N
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [7:0]             rx_data,
  input  logic                   rx_valid,
  output logic [N-1:0][N-1:0]    conn_in,       // [m][n] = connection_list[n][m]
  output logic [N-1:0][7:0]      threshold,
  output logic [N-1:0][7:0]      weight,
  output logic [N-1:0]           impulse,
  output logic                   impulse_valid,
  output logic [15:0]            byte_count
);
  import snn_pkg::*;

  localparam int unsigned NB  = bytes_for_bits(N);
  localparam int unsigned RW  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned BW  = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned TOT = bytes_per_update(N);

  section_e      sec;
  logic [RW-1:0] row;
  logic [BW-1:0] col;

  wire row_last = (row == RW'(N - 1));
  wire col_last = (col == BW'(NB - 1));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sec           <= SEC_CONN;
      row           <= '0;
      col           <= '0;
      conn_in       <= '0;
      threshold     <= '1;   // no neuron can fire before it is configured
      weight        <= '0;
      impulse       <= '0;
      impulse_valid <= 1'b0;
      byte_count    <= '0;
    end else begin
      impulse_valid <= 1'b0;
      if (rx_valid) begin
        byte_count <= (byte_count == 16'(TOT - 1)) ? '0 : byte_count + 1'b1;
        unique case (sec)
          SEC_CONN: begin
            for (int j = 0; j < N; j++)
              if (col == BW'(j / 8)) conn_in[j][row] <= rx_data[j % 8];
            if (col_last) begin
              col <= '0;
              if (row_last) begin
                row <= '0;
                sec <= SEC_THRESH;
              end else begin
                row <= row + 1'b1;
              end
            end else begin
              col <= col + 1'b1;
            end
          end
          SEC_THRESH: begin
            threshold[row] <= rx_data;
            if (row_last) begin
              row <= '0;
              sec <= SEC_WEIGHT;
            end else begin
              row <= row + 1'b1;
            end
          end
          SEC_WEIGHT: begin
            weight[row] <= rx_data;
            if (row_last) begin
              row <= '0;
              sec <= SEC_IMPULSE;
            end else begin
              row <= row + 1'b1;
            end
          end
          SEC_IMPULSE: begin
            for (int j = 0; j < N; j++)
              if (col == BW'(j / 8)) impulse[j] <= rx_data[j % 8];
            if (col_last) begin
              col           <= '0;
              sec           <= SEC_CONN;
              impulse_valid <= 1'b1;
            end else begin
              col <= col + 1'b1;
            end
          end
          default: sec <= SEC_CONN;
        endcase
      end
    end
  end

endmodule

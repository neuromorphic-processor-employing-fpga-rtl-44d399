// snn_top: the neuromorphic processor.
//
// A host configures and drives an array of N leaky integrate-and-fire
// neurons over a 9600 baud UART. The receiver turns the serial line into
// bytes; the register bank stores them as connection list, thresholds,
// weights and input impulses; when an update is complete the SNN array
// samples the impulses for one cycle and runs; every cycle in which any
// neuron spikes, the spike vector is handed to the transmitter, which sends
// it back to the host (merging vectors that arrive while it is busy). The
// refractory period is a direct input of the array.
//
// Interface: clk (100 MHz), rst_n (synchronous, active low), rx, tx,
// refractory_period[7:0]; tx_valid is high while a result frame is sent;
// spikes[N-1:0] is the live spike vector for observation.
//
// Timing: a full update of N*ceil(N/8) + 2N + ceil(N/8) bytes (898 for
// N = 74, about 93.5 ms at 9600 baud); a two-layer network answers 5 clock
// cycles after the last impulse byte has been received; the result frame of
// ceil(N/8) bytes then starts on tx.
//
// Parameters: N neurons (74), CLK_HZ (100 MHz), BAUD (9600) and LEAK, the
// fixed per-cycle leak step of every neuron (0, i.e. pure integrate-and-fire,
// by default). The register bank's byte counter and the membrane potentials
// are internal signals only; they are left unconnected at this level and
// stay visible in simulation.
//
// From the paper: the block structure, clock, baud rate, neuron count and
// latency. Own choices are described in each block; the main ones here are
// the refractory period as a pin rather than a register, and the reset.
module snn_top #(
  parameter int unsigned N       = snn_pkg::DEF_N,
  parameter int unsigned CLK_HZ  = snn_pkg::DEF_CLK_HZ,
  parameter int unsigned BAUD    = snn_pkg::DEF_BAUD,
  parameter int unsigned LEAK    = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         rx,
  input  logic [7:0]   refractory_period,
  output logic         tx,
  output logic         tx_valid,
  output logic [N-1:0] spikes
);
  import snn_pkg::*;

  localparam int unsigned CPB = clks_per_bit(CLK_HZ, BAUD);

  logic [7:0]                 rx_data;
  logic                       rx_valid;
  logic [N-1:0][N-1:0]        conn_in;
  logic [N-1:0][7:0]          threshold;
  logic [N-1:0][7:0]          weight;
  logic [N-1:0]               impulse;
  logic                       impulse_valid;
  logic [15:0]                byte_count;
  logic                       spikes_valid;
  logic [N-1:0][POT_W_DEF-1:0] potential;
  logic                       bit_tick, tick_clr;

  uart_rx #(.CLKS_PER_BIT(CPB)) u_rx (
    .clk  (clk),
    .rst_n(rst_n),
    .rx   (rx),
    .data (rx_data),
    .valid(rx_valid)
  );

  register_bank #(.N(N)) u_regbank (
    .clk          (clk),
    .rst_n        (rst_n),
    .rx_data      (rx_data),
    .rx_valid     (rx_valid),
    .conn_in      (conn_in),
    .threshold    (threshold),
    .weight       (weight),
    .impulse      (impulse),
    .impulse_valid(impulse_valid),
    .byte_count   (byte_count)
  );

  snn_module #(.N(N), .LEAK(LEAK)) u_snn_proc (
    .clk          (clk),
    .rst_n        (rst_n),
    .conn_in      (conn_in),
    .threshold    (threshold),
    .weight       (weight),
    .impulse      (impulse),
    .impulse_valid(impulse_valid),
    .refractory   (refractory_period),
    .spikes       (spikes),
    .spikes_valid (spikes_valid),
    .potential    (potential)
  );

  clk_div #(.DIV(CPB)) u_clk_div (
    .clk  (clk),
    .rst_n(rst_n),
    .clr  (tick_clr),
    .tick (bit_tick)
  );

  uart_tx #(.N(N)) u_tx (
    .clk     (clk),
    .rst_n   (rst_n),
    .data    (spikes),
    .valid   (spikes_valid),
    .bit_tick(bit_tick),
    .tick_clr(tick_clr),
    .tx      (tx),
    .busy    (tx_valid)
  );

endmodule

// snn_module: the SNN processing array (u_snn_proc).
//
// N identical LIF neurons run in parallel, each with its own threshold and
// weight from the register bank and a common refractory period. Their output
// spikes are fed back through the all-to-all multiplexer matrix, so any
// feed-forward or recurrent topology is set by the connection list alone.
// The input impulse vector is sampled for exactly one cycle when the register
// bank signals a complete update (impulse_valid); the sampled bit n is an
// extra input of neuron n with the same weight as its other inputs.
//
// Timing: impulse_valid in cycle 0 -> sampled in cycle 1 -> first-layer spikes
// after 2 more edges (cycle 3) -> second-layer spikes at cycle 5, the
// five-cycle input-to-output latency of a two-layer network.
//
// Interface: configuration from the register bank, refractory period from
// outside; spikes[N-1:0] with spikes_valid = OR of all spikes, the data and
// valid pair read by the UART transmitter.
//
// From the paper: the neuron array, the mux interconnect, the sampling cycle
// and the 2-cycle-per-layer latency. Own choices: how the external impulse
// enters a neuron, and the valid rule.
module snn_module #(
  parameter int unsigned N         = snn_pkg::DEF_N,
  parameter int unsigned POT_W     = snn_pkg::POT_W_DEF,
  parameter int unsigned LEAK      = 0,
  parameter int unsigned SYN_DELAY = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0][N-1:0]    conn_in,       // [m][n] = connection_list[n][m]
  input  logic [N-1:0][7:0]      threshold,
  input  logic [N-1:0][7:0]      weight,
  input  logic [N-1:0]           impulse,
  input  logic                   impulse_valid,
  input  logic [7:0]             refractory,
  output logic [N-1:0]           spikes,
  output logic                   spikes_valid,
  output logic [N-1:0][POT_W-1:0] potential
);

  logic [N-1:0]        ext_q;
  logic [N-1:0][N-1:0] routed;

  // input sampling cycle
  always_ff @(posedge clk) begin
    if (!rst_n) ext_q <= '0;
    else        ext_q <= impulse_valid ? impulse : '0;
  end

  spike_router #(.N(N)) u_router (
    .spikes   (spikes),
    .conn_in  (conn_in),
    .routed   (routed)
  );

  for (genvar m = 0; m < N; m++) begin : g_neuron
    logic [7:0] refr_count_unused;
    lif_neuron #(
      .N_IN     (N + 1),
      .POT_W    (POT_W),
      .LEAK     (LEAK),
      .SYN_DELAY(SYN_DELAY)
    ) u_neuron (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_spikes ({ext_q[m], routed[m]}),
      .weight    (weight[m]),
      .threshold (threshold[m]),
      .refractory(refractory),
      .spike     (spikes[m]),
      .potential (potential[m]),
      .refr_count(refr_count_unused)
    );
  end

  assign spikes_valid = |spikes;

endmodule

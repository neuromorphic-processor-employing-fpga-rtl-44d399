// spike_router: the all-to-all multiplexer matrix between neurons.
//
// For every ordered pair (n, m) a 2:1 multiplexer selects either neuron n's
// output spike (select = connection_list[n][m] = 1) or a constant 0, and drives
// input n of neuron m. routed[m] is therefore the full N-bit input vector of
// neuron m, with a zero wherever the connection list disables a synapse.
// Self-connections (n == m) are allowed like any other entry.
//
// The list arrives per destination (conn_in[m][n] = connection_list[n][m]),
// so the N multiplexers that feed neuron m form one N-bit select-or-zero,
// written as an AND of the spike vector with neuron m's pattern.
//
// Interface: spikes[N-1:0], conn_in[m][n], routed[m][n]. Timing: purely
// combinational; the one-cycle synaptic delay is the neuron's first stage.
//
// From the paper: the matrix of multiplexers with 0 on one input and the
// neuron output on the other, selected by connection_list[n][m].
module spike_router #(
  parameter int unsigned N = snn_pkg::DEF_N
) (
  input  logic [N-1:0]          spikes,
  input  logic [N-1:0][N-1:0]   conn_in,     // [m][n] = connection_list[n][m]
  output logic [N-1:0][N-1:0]   routed       // [m][n]
);

  // mux(select = connection bit, 1 -> spike, 0 -> constant 0) == AND
  for (genvar m = 0; m < N; m++) begin : g_dst
    assign routed[m] = conn_in[m] & spikes;
  end

endmodule

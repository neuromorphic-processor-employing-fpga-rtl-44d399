// lif_neuron: fixed-leak leaky integrate-and-fire neuron with refractory period.
//
// Each cycle k the neuron evaluates
//   v~[k+1] = v[k] + w * (number of input spikes) - LEAK * (v[k] != 0)
//   y[k+1]  = 1 if v~[k+1] >= threshold and r[k] == 0
//   v[k+1]  = 0 if y[k+1] or r[k] > 0, else v~[k+1]
//   r[k+1]  = refractory if y[k+1], else max(0, r[k] - 1)
// in two pipeline stages. Stage 1 (synapse) counts the spikes on in_spikes,
// multiplies the count by the neuron's single 8-bit weight and passes the
// product through a SYN_DELAY-deep register line (the synaptic delay, default
// one cycle). Stage 2 (soma) applies the equations above and registers the
// spike. An input spike therefore produces an output spike SYN_DELAY + 1 = 2
// clock edges later, the two cycles per layer of the processor.
//
// The potential is POT_W bits wide and unsigned: the sum saturates at
// 2^POT_W - 1 and the leak never takes it below 0. While r > 0 the neuron
// ignores its inputs (its potential is held at 0).
//
// Interface: in_spikes[N_IN-1:0], weight, threshold, refractory (8 bits
// each); outputs spike (registered), potential and refr_count (state, for
// observation).
//
// From the paper: the update, threshold, reset and refractory equations, the
// fixed-leak form, one weight per neuron, the 8-bit potential, the default
// one-cycle delay and the 2-cycle latency. Own choices: saturation, the
// clamp at 0, and LEAK and SYN_DELAY being synthesis parameters.
module lif_neuron #(
  parameter int unsigned N_IN      = snn_pkg::DEF_N + 1,
  parameter int unsigned POT_W     = snn_pkg::POT_W_DEF,
  parameter int unsigned LEAK      = 0,
  parameter int unsigned SYN_DELAY = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_IN-1:0]       in_spikes,
  input  logic [7:0]            weight,
  input  logic [7:0]            threshold,
  input  logic [7:0]            refractory,
  output logic                  spike,
  output logic [POT_W-1:0]      potential,
  output logic [7:0]            refr_count
);

  localparam int unsigned CNT_W = $clog2(N_IN + 1);
  localparam int unsigned SUM_W = 8 + CNT_W;
  localparam int unsigned ACC_W = ((SUM_W > POT_W) ? SUM_W : POT_W) + 1;
  localparam logic [ACC_W-1:0] POT_MAX = ACC_W'((1 << POT_W) - 1);

  initial begin
    assert (SYN_DELAY >= 1 && SYN_DELAY <= 255)
      else $error("lif_neuron: SYN_DELAY must be 1..255");
  end

  // ---------------- stage 1: synaptic sum and delay line ----------------
  logic [CNT_W-1:0] n_in;
  assign n_in = CNT_W'($countones(in_spikes));

  logic [SUM_W-1:0] syn_line [SYN_DELAY];
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int d = 0; d < SYN_DELAY; d++) syn_line[d] <= '0;
    end else begin
      syn_line[0] <= SUM_W'(weight) * SUM_W'(n_in);
      for (int d = 1; d < SYN_DELAY; d++) syn_line[d] <= syn_line[d-1];
    end
  end
  wire [SUM_W-1:0] syn_in = syn_line[SYN_DELAY-1];

  // ---------------- stage 2: soma ----------------
  logic [ACC_W-1:0] v_sum, v_tilde;
  logic [POT_W-1:0] v_sat;
  logic             fire;
  always_comb begin
    v_sum = ACC_W'(potential) + ACC_W'(syn_in);
    if (potential != '0)
      v_tilde = (v_sum >= ACC_W'(LEAK)) ? v_sum - ACC_W'(LEAK) : '0;
    else
      v_tilde = v_sum;
    v_sat = (v_tilde > POT_MAX) ? POT_MAX[POT_W-1:0] : v_tilde[POT_W-1:0];
    fire  = (v_tilde >= ACC_W'(threshold)) && (refr_count == 8'd0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      potential  <= '0;
      refr_count <= '0;
      spike      <= 1'b0;
    end else begin
      spike      <= fire;
      potential  <= (fire || refr_count != 8'd0) ? '0 : v_sat;
      if (fire)                    refr_count <= refractory;
      else if (refr_count != 8'd0) refr_count <= refr_count - 1'b1;
    end
  end

endmodule

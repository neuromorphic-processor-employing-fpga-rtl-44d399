// tb_snn_top: end-to-end test of the processor on the 7-neuron Iris network.
//
// The network follows the Iris topology: input neurons 0..3 (one per
// feature), output neurons 4, 5, 6 (setosa, versicolor, virginica), with
// connections 0->4,5,6; 1->4,5; 2->5; 3->5, threshold 1 and weight 2 on the
// input layer and a refractory period of 2 cycles. All 16 binary input
// patterns are sent over the serial line at a reduced baud rate, each as a
// complete register update, and the processor is compared with the reference
// model. Further updates reconfigure the same hardware: a self-loop on
// output neuron 4 (its own spike returns while it is refractory) and random
// multi-layer feed-forward networks over all seven neurons. The leak is set to 1 so that leftover potentials
// decay between updates.
//
// Counted mechanisms (each must occur): inference runs, output spikes with
// the 5-cycle latency, refractory-blocked spikes, leak steps, result vectors
// merged while the transmitter is busy, runtime reconfiguration that changes
// the answer for the same input.
module tb_snn_top;
  import snn_ref_pkg::*;
  localparam int unsigned N = 7, CLK_HZ = 1_600_000, BAUD = 100_000, CPB = 16;
  localparam int unsigned LEAK = 1;

  logic clk = 0, rst_n = 0, rx, tx, tx_valid;
  logic [7:0] refractory_period = 8'd2;
  logic [N-1:0] spikes;
  int checks = 0, failures = 0;
  int n_lat5 = 0, n_reconf_change = 0;

  always #5 clk = ~clk;

  snn_top #(.N(N), .CLK_HZ(CLK_HZ), .BAUD(BAUD), .LEAK(LEAK)) dut (
    .clk, .rst_n, .rx, .refractory_period, .tx, .tx_valid, .spikes);

  snn_e2e #(.N(N), .CPB(CPB), .WINDOW(30)) e2e (
    .clk, .rx_line(rx), .tx_line(tx),
    .impulse_valid(dut.u_regbank.impulse_valid), .spikes(dut.spikes),
    .potential(dut.u_snn_proc.potential), .conn_in(dut.u_regbank.conn_in),
    .threshold(dut.u_regbank.threshold), .weight(dut.u_regbank.weight),
    .impulse(dut.u_regbank.impulse),
    .tx_merge(dut.u_tx.valid && dut.u_tx.busy), .tx_busy(tx_valid));

  snn_ref m;

  task automatic iris_config(input logic [3:0] features);
    m.clear_config();
    m.cl[0][4] = 1; m.cl[0][5] = 1; m.cl[0][6] = 1;
    m.cl[1][4] = 1; m.cl[1][5] = 1;
    m.cl[2][5] = 1; m.cl[3][5] = 1;
    for (int i = 0; i < 4; i++) begin m.thr[i] = 1; m.w[i] = 2; m.imp[i] = features[i]; end
    m.thr[4] = 4; m.w[4] = 2;   // setosa: features 0 and 1
    m.thr[5] = 6; m.w[5] = 2;   // versicolor: three or more features
    m.thr[6] = 2; m.w[6] = 1;   // virginica: feature 0 alone is not enough
  endtask

  initial begin
    logic [N-1:0] fired, fired_loop;
    int first;
    m = new(N, LEAK, 8);
    m.refr = 2;
    repeat (4) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (tx !== 1'b1 || spikes !== '0) begin failures++; $display("FAIL: not idle after reset"); end
    for (int p = 0; p < 16; p++) begin
      iris_config(4'(p));
      e2e.run(m, 4, 6, fired, first);
      if (first == 5) n_lat5++;
      if (fired != '0) begin
        checks++;
        if (first != 5) begin failures++; $display("FAIL: pattern %0d: first output spike at cycle %0d", p, first); end
      end
      $display("pattern %b -> output neurons 6..4 = %b", 4'(p), fired[2:0]);
    end
    // reconfiguration: self-loop on neuron 4 for the setosa pattern
    iris_config(4'b0011);
    e2e.run(m, 4, 6, fired, first);
    iris_config(4'b0011);
    m.cl[4][4] = 1; m.cl[4][6] = 1; m.thr[6] = 1;
    e2e.run(m, 4, 6, fired_loop, first);
    if (fired_loop != fired) n_reconf_change++;
    // random multi-layer feed-forward networks (acyclic, so activity dies out)
    for (int rep = 0; rep < 4; rep++) begin
      m.clear_config();
      for (int i = 0; i < N; i++) begin
        for (int j = i + 1; j < N; j++) m.cl[i][j] = ($urandom_range(0, 1) == 0);
        m.thr[i] = $urandom_range(1, 8); m.w[i] = $urandom_range(1, 4); m.imp[i] = 1'($urandom);
      end
      e2e.run(m, 0, N - 1, fired, first);
    end
    checks += e2e.checks;
    failures += e2e.failures;
    $display("inferences=%0d lat5=%0d out_spikes=%0d one_class=%0d refr_blocks=%0d leak_steps=%0d merges=%0d reconf_changes=%0d",
             e2e.n_infer, n_lat5, e2e.n_out_spike, e2e.n_one_class, m.n_refr_block, m.n_leak, e2e.n_merge, n_reconf_change);
    checks += 6;
    if (e2e.n_infer == 0)    begin failures++; $display("FAIL: no inference"); end
    if (n_lat5 == 0)         begin failures++; $display("FAIL: no 5-cycle output spike"); end
    if (m.n_refr_block == 0) begin failures++; $display("FAIL: refractory never blocked a spike"); end
    if (m.n_leak == 0)       begin failures++; $display("FAIL: leak never applied"); end
    if (e2e.n_merge == 0)    begin failures++; $display("FAIL: no merge in the transmitter"); end
    if (n_reconf_change == 0) begin failures++; $display("FAIL: reconfiguration changed nothing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

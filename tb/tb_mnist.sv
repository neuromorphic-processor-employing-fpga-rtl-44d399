// tb_mnist: the 74-neuron MNIST network (64 pixel neurons, 10 digit neurons)
// end to end at a reduced baud rate. Synthetic 8x8 binary digit templates
// stand in for the thresholded images; each of the ten digits is sent as a
// complete 898-byte register update (connection list, thresholds, weights,
// pixel impulses) and must be classified by exactly its own digit neuron,
// 5 cycles after the update, with the whole array matching the reference
// model and the result frame on tx matching the spikes. Refractory period 4.
// A leak of 1 per cycle is set so that the sub-threshold potential that a
// digit leaves in the other digit neurons has decayed before the next image
// (with no leak it would carry over into the next inference).
module tb_mnist;
  import snn_ref_pkg::*;
  localparam int unsigned N = 74, CLK_HZ = 1_600_000, BAUD = 100_000, CPB = 16;

  logic clk = 0, rst_n = 0, rx, tx, tx_valid;
  logic [7:0] refractory_period = 8'd4;
  logic [N-1:0] spikes;
  int checks = 0, failures = 0, n_correct = 0;

  always #5 clk = ~clk;

  snn_top #(.N(N), .CLK_HZ(CLK_HZ), .BAUD(BAUD), .LEAK(1)) dut (
    .clk, .rst_n, .rx, .refractory_period, .tx, .tx_valid, .spikes);

  snn_e2e #(.N(N), .CPB(CPB), .WINDOW(12)) e2e (
    .clk, .rx_line(rx), .tx_line(tx),
    .impulse_valid(dut.u_regbank.impulse_valid), .spikes(dut.spikes),
    .potential(dut.u_snn_proc.potential), .conn_in(dut.u_regbank.conn_in),
    .threshold(dut.u_regbank.threshold), .weight(dut.u_regbank.weight),
    .impulse(dut.u_regbank.impulse),
    .tx_merge(dut.u_tx.valid && dut.u_tx.busy), .tx_busy(tx_valid));

  snn_ref m;
  logic [63:0] tmpl [10];

  initial begin
    logic [N-1:0] fired;
    int first;
    m = new(N, 1, 8);
    m.refr = 4;
    make_templates(tmpl);
    repeat (4) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 10; k++) begin
      mnist_config(m, tmpl, tmpl[k]);
      e2e.run(m, 64, 73, fired, first);
      checks += 2;
      if (fired[9:0] != 10'(1 << k)) begin failures++; $display("FAIL: digit %0d -> outputs %b", k, fired[9:0]); end
      else n_correct++;
      if (first != 5) begin failures++; $display("FAIL: digit %0d answered at cycle %0d", k, first); end
    end
    checks += e2e.checks;
    failures += e2e.failures;
    $display("digits correct=%0d/10 merges=%0d", n_correct, e2e.n_merge);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

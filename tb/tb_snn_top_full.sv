// tb_snn_top_full: one complete MNIST inference on the processor exactly as
// built: 74 neurons, 100 MHz clock, 9600 baud, no parameter overrides.
//
// The host model sends the 898-byte register update (about 93.5 ms of serial
// traffic) for a synthetic 8x8 digit template, the array answers, and the
// 10-byte result frame comes back over tx. Checked: the update is 898 bytes,
// the register bank holds the sent configuration, every neuron follows the
// reference model, the input layer spikes 3 cycles and the digit neuron
// 5 cycles after the update, exactly the right digit fires, and the result
// frame reports the neurons that spiked.
`timescale 1ns/1ps
module tb_snn_top_full;
  import snn_ref_pkg::*;
  localparam int unsigned N = 74, CPB = 10417;

  logic clk = 0, rst_n = 0, rx, tx, tx_valid;
  logic [7:0] refractory_period = 8'd4;
  logic [N-1:0] spikes;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;   // 100 MHz

  snn_top dut (.clk, .rst_n, .rx, .refractory_period, .tx, .tx_valid, .spikes);

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
    logic [7:0]   q[$];
    int first, k;
    realtime t0;
    m = new(N, 0, 8);
    m.refr = 4;
    make_templates(tmpl);
    k = 7;
    mnist_config(m, tmpl, tmpl[k]);
    m.to_bytes(q);
    checks++;
    if (q.size() != 898) begin failures++; $display("FAIL: update is %0d bytes", q.size()); end
    repeat (4) @(negedge clk);
    rst_n = 1;
    t0 = $realtime;
    e2e.run(m, 64, 73, fired, first);
    $display("update + inference + result frame took %0t", $realtime - t0);
    checks += 2;
    if (fired[9:0] != 10'(1 << k)) begin failures++; $display("FAIL: digit %0d -> outputs %b", k, fired[9:0]); end
    if (first != 5) begin failures++; $display("FAIL: answered at cycle %0d", first); end
    checks += e2e.checks;
    failures += e2e.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (120_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

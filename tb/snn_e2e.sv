// snn_e2e: end-to-end driver and checker for the complete processor.
//
// run() plays the host for one inference: it serialises a configuration
// held in a reference model into the register-bank byte stream, sends it
// over the serial line, checks that the register bank holds exactly that
// configuration when it signals the update, then steps the reference model
// cycle by cycle next to the hardware for WINDOW cycles, comparing every
// neuron's spike and potential. It checks the input-to-output latency of the
// output layer [out_lo, out_hi], waits for the result frames on the tx line
// and checks that their bits are exactly the neurons that spiked.
module snn_e2e #(
  parameter int unsigned N      = 7,
  parameter int unsigned CPB    = 16,
  parameter int unsigned WINDOW = 40
) (
  input  logic                 clk,
  output logic                 rx_line,
  input  logic                 tx_line,
  input  logic                 impulse_valid,
  input  logic [N-1:0]         spikes,
  input  logic [N-1:0][7:0]    potential,
  input  logic [N-1:0][N-1:0]  conn_in,        // [m][n]
  input  logic [N-1:0][7:0]    threshold,
  input  logic [N-1:0][7:0]    weight,
  input  logic [N-1:0]         impulse,
  input  logic                 tx_merge,
  input  logic                 tx_busy
);
  import snn_ref_pkg::*;
  localparam int unsigned NB = (N + 7) / 8;

  int checks = 0, failures = 0;
  int n_infer = 0, n_merge = 0, n_out_spike = 0, n_one_class = 0;

  uart_host #(.CPB(CPB)) host (.clk(clk), .rx_line(rx_line), .tx_line(tx_line));

  always @(negedge clk) if (tx_merge) n_merge++;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Returns the output-layer neurons that spiked (bit i = neuron out_lo + i)
  // and the cycle of the first output spike after the update (-1 if none).
  task automatic run(snn_ref m, input int out_lo, input int out_hi,
                     output logic [N-1:0] out_fired, output int first_out);
    logic [7:0]   q[$];
    logic [N-1:0] all_fired = '0;
    logic [N-1:0] rx_bits;
    bit           iv;
    int           t;
    out_fired = '0;
    first_out = -1;
    m.to_bytes(q);
    chk(q.size() == N * NB + 2 * N + NB, "update length");
    while (host.got.size() != 0) void'(host.got.pop_front());
    for (int i = 0; i < q.size() - 1; i++) host.send_byte(q[i]);
    // the update completes during the stop bit of the last byte
    fork
      host.send_byte(q[q.size() - 1]);
    join_none
    // find the update strobe (cycle 0)
    t = 0;
    do begin @(negedge clk); t++; end while (!impulse_valid && t < 40 * CPB);
    chk(impulse_valid, "impulse_valid after the last byte");
    n_infer++;
    for (int i = 0; i < N; i++) begin
      chk(threshold[i] == 8'(m.thr[i]) && weight[i] == 8'(m.w[i]) && impulse[i] == m.imp[i],
          $sformatf("register bank entry %0d", i));
      for (int j = 0; j < N; j++)
        if (conn_in[j][i] != m.cl[i][j]) chk(0, $sformatf("connection_list[%0d][%0d]", i, j));
    end
    // start the model from the array's quiescent state
    chk(spikes == '0, "array quiet before the inference");
    for (int i = 0; i < N; i++) begin
      m.v[i] = potential[i]; m.r[i] = 0; m.y[i] = 0; m.syn[i] = 0; m.ext[i] = 0;
    end
    iv = 1;
    for (int c = 1; c <= WINDOW; c++) begin
      m.step(iv);
      iv = 0;
      @(negedge clk);
      for (int i = 0; i < N; i++)
        if (spikes[i] !== m.y[i] || potential[i] !== 8'(m.v[i]))
          chk(0, $sformatf("cycle %0d neuron %0d spike %b/%b v %0d/%0d", c, i, spikes[i], m.y[i], potential[i], m.v[i]));
      checks++;
      all_fired |= spikes;
      for (int i = out_lo; i <= out_hi; i++)
        if (spikes[i]) begin
          out_fired[i - out_lo] = 1'b1;
          n_out_spike++;
          if (first_out < 0) first_out = c;
        end
    end
    if ($countones(out_fired) == 1) n_one_class++;
    wait fork;
    // collect the result frames until the line has been idle for a while
    t = 0;
    while (t < 30 * CPB) begin
      @(negedge clk);
      if (tx_busy || !tx_line) t = 0; else t++;
    end
    chk(host.got.size() % NB == 0 && (all_fired == '0) == (host.got.size() == 0), "whole result frames");
    chk(host.frame_errors == 0, "result frame stop bits");
    rx_bits = '0;
    while (host.got.size() >= NB) begin
      logic [NB*8-1:0] f = '0;
      for (int b = 0; b < NB; b++) f[8*b +: 8] = host.got.pop_front();
      rx_bits |= f[N-1:0];
      chk(f[NB*8-1:0] >> N == 0, "padding bits of a result frame are zero");
    end
    chk(rx_bits == all_fired, $sformatf("reported spikes %h, fired %h", rx_bits, all_fired));
  endtask
endmodule

// tb_snn_module: the SNN array with the 7-neuron Iris topology and with
// random recurrent configurations, compared every cycle with the reference
// model. Checks the 5-cycle input-to-output latency of a two-layer network.
module tb_snn_module;
  import snn_ref_pkg::*;
  localparam int unsigned N = 7;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][N-1:0] conn_list = '0, conn_in;
  logic [N-1:0][7:0] threshold = '0, weight = '0;
  logic [N-1:0] impulse = '0;
  logic impulse_valid = 0;
  logic [7:0] refractory = 0;
  logic [N-1:0] spikes;
  logic spikes_valid;
  logic [N-1:0][7:0] potential;
  int checks = 0, failures = 0;
  snn_ref ref_m;

  always #5 clk = ~clk;
  always_comb for (int n = 0; n < N; n++) for (int m = 0; m < N; m++) conn_in[m][n] = conn_list[n][m];
  snn_module #(.N(N)) dut (.clk, .rst_n, .conn_in, .threshold, .weight, .impulse, .impulse_valid,
    .refractory, .spikes, .spikes_valid, .potential);

  task automatic load_ref();
    for (int n = 0; n < N; n++) begin
      for (int m = 0; m < N; m++) ref_m.cl[n][m] = conn_list[n][m];
      ref_m.thr[n] = threshold[n]; ref_m.w[n] = weight[n]; ref_m.imp[n] = impulse[n];
    end
    ref_m.refr = refractory;
  endtask

  task automatic cyc();
    bit iv = impulse_valid;
    @(posedge clk); ref_m.step(iv); @(negedge clk);
    for (int m = 0; m < N; m++) begin
      checks++;
      if (spikes[m] !== ref_m.y[m] || potential[m] !== 8'(ref_m.v[m])) begin
        failures++;
        $display("FAIL: neuron %0d spike %b/%b v %0d/%0d", m, spikes[m], ref_m.y[m], potential[m], ref_m.v[m]);
      end
    end
    checks++;
    if (spikes_valid !== (|spikes)) begin failures++; $display("FAIL: spikes_valid"); end
  endtask

  initial begin
    int lat;
    ref_m = new(N, 0, 8);
    repeat (3) @(posedge clk);
    // Iris topology (figure of the Iris network): 0->4,5,6; 1->4,5; 2->5; 3->5
    conn_list[0][4] = 1; conn_list[0][5] = 1; conn_list[0][6] = 1;
    conn_list[1][4] = 1; conn_list[1][5] = 1;
    conn_list[2][5] = 1; conn_list[3][5] = 1;
    for (int n = 0; n < N; n++) begin threshold[n] = 1; weight[n] = 2; end
    threshold[4] = 4; threshold[5] = 6; threshold[6] = 3;
    refractory = 2;
    impulse = 7'b0000011;   // features 0 and 1 spike
    load_ref();
    @(negedge clk) rst_n = 1;
    impulse_valid = 1;
    cyc();
    impulse_valid = 0;
    lat = 1;
    while (!spikes[4] && lat < 20) begin cyc(); lat++; end
    checks++;
    if (lat != 5) begin failures++; $display("FAIL: two-layer latency %0d cycles, expected 5", lat); end
    checks++;
    if (spikes[5] || spikes[6]) begin failures++; $display("FAIL: more than one class neuron"); end
    repeat (10) cyc();
    // random configurations, including recurrent connections
    for (int rep = 0; rep < 30; rep++) begin
      for (int n = 0; n < N; n++) begin
        conn_list[n] = N'($urandom) & N'($urandom);
        threshold[n] = 8'($urandom_range(1, 60));
        weight[n]    = 8'($urandom_range(0, 40));
      end
      refractory = 8'($urandom_range(0, 4));
      impulse = N'($urandom);
      load_ref();
      impulse_valid = 1;
      cyc();
      impulse_valid = 0;
      repeat (30) cyc();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

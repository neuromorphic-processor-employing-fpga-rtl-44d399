// tb_lif_neuron: three neurons (no leak / delay 1, leak 3 / delay 1, leak 0 /
// delay 3) driven with the same random spikes and parameters; each is compared
// every cycle with a model of the LIF equations written in this file. Directed
// parts check the 2-cycle spike latency, the refractory hold and
// that each mechanism occurred.
module tb_lif_neuron;
  localparam int unsigned N_IN = 6;
  logic clk = 0, rst_n = 0;
  logic [N_IN-1:0] in_spikes = '0;
  logic [7:0] weight = 0, threshold = 0, refractory = 0;
  logic       spike [3];
  logic [7:0] pot [3];
  logic [7:0] rc [3];
  int checks = 0, failures = 0;
  int n_fire = 0, n_refr_block = 0, n_leak = 0;
  int unsigned LK [3] = '{0, 3, 0};
  int unsigned DL [3] = '{1, 1, 3};

  always #5 clk = ~clk;

  lif_neuron #(.N_IN(N_IN), .LEAK(0), .SYN_DELAY(1)) d0 (.clk, .rst_n, .in_spikes, .weight, .threshold, .refractory,
    .spike(spike[0]), .potential(pot[0]), .refr_count(rc[0]));
  lif_neuron #(.N_IN(N_IN), .LEAK(3), .SYN_DELAY(1)) d1 (.clk, .rst_n, .in_spikes, .weight, .threshold, .refractory,
    .spike(spike[1]), .potential(pot[1]), .refr_count(rc[1]));
  lif_neuron #(.N_IN(N_IN), .LEAK(0), .SYN_DELAY(3)) d2 (.clk, .rst_n, .in_spikes, .weight, .threshold, .refractory,
    .spike(spike[2]), .potential(pot[2]), .refr_count(rc[2]));

  // model state
  int unsigned mv [3], mr [3];
  bit          my [3];
  int unsigned line [3][$];

  task automatic model_edge();
    for (int i = 0; i < 3; i++) begin
      int unsigned s = line[i].pop_front();
      int vt = int'(mv[i]) + int'(s);
      bit f;
      if (mv[i] != 0) begin
        if (i == 1 && vt >= 3 && vt < 255) n_leak++;
        vt -= int'(LK[i]); if (vt < 0) vt = 0;
      end
      f = (vt >= int'(threshold)) && mr[i] == 0;
      if (vt >= int'(threshold) && mr[i] != 0) n_refr_block++;
      my[i] = f;
      if (f) n_fire++;
      if (f || mr[i] > 0) mv[i] = 0; else mv[i] = (vt > 255) ? 255 : vt;
      if (f) mr[i] = refractory; else if (mr[i] > 0) mr[i]--;
      line[i].push_back(weight * $countones(in_spikes));
    end
  endtask

  task automatic compare();
    for (int i = 0; i < 3; i++) begin
      checks++;
      if (spike[i] !== my[i] || pot[i] !== 8'(mv[i]) || rc[i] !== 8'(mr[i])) begin
        failures++;
        $display("FAIL: n%0d spike %b/%b pot %0d/%0d r %0d/%0d", i, spike[i], my[i], pot[i], mv[i], rc[i], mr[i]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 3; i++) begin
      mv[i] = 0; mr[i] = 0; my[i] = 0;
      for (int d = 0; d < DL[i]; d++) line[i].push_back(0);
    end
    repeat (3) @(posedge clk);
    // directed: latency. threshold 1, weight 2, refractory 2, one input spike
    threshold = 1; weight = 2; refractory = 2;
    @(negedge clk) rst_n = 1;
    in_spikes = 6'b000001;
    @(posedge clk); model_edge(); @(negedge clk); compare();
    in_spikes = '0;
    checks++; if (spike[0]) begin failures++; $display("FAIL: spike after 1 edge"); end
    @(posedge clk); model_edge(); @(negedge clk); compare();
    checks++; if (!spike[0]) begin failures++; $display("FAIL: no spike 2 edges after input"); end
    checks++; if (rc[0] != 2) begin failures++; $display("FAIL: refractory not loaded"); end
    // random phase
    for (int t = 0; t < 3000; t++) begin
      if (t % 500 == 0) begin
        threshold = 8'($urandom_range(1, 255));
        weight    = 8'($urandom_range(0, 120));
        refractory= 8'($urandom_range(0, 5));
      end
      in_spikes = N_IN'($urandom) & N_IN'($urandom);
      @(posedge clk); model_edge(); @(negedge clk); compare();
    end
    checks++; if (n_fire == 0) begin failures++; $display("FAIL: never fired"); end
    checks++; if (n_refr_block == 0) begin failures++; $display("FAIL: refractory never blocked a spike"); end
    checks++; if (n_leak == 0) begin failures++; $display("FAIL: leak never applied"); end
    $display("fires=%0d refractory_blocks=%0d leak_steps=%0d", n_fire, n_refr_block, n_leak);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

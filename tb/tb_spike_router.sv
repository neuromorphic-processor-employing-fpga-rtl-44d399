// tb_spike_router: random spike vectors and connection lists; every routed
// bit routed[m][n] must equal connection_list[n][m] AND spikes[n].
module tb_spike_router;
  localparam int unsigned N = 9;
  logic [N-1:0] spikes;
  logic [N-1:0][N-1:0] conn_list, conn_in, routed;
  int checks = 0, failures = 0;

  spike_router #(.N(N)) dut (.spikes, .conn_in, .routed);

  initial begin
    for (int t = 0; t < 200; t++) begin
      spikes = N'($urandom);
      for (int n = 0; n < N; n++) conn_list[n] = N'($urandom);
      if (t == 0) begin spikes = '1; conn_list = '0; end
      if (t == 1) begin spikes = '1; for (int n = 0; n < N; n++) conn_list[n] = N'(1 << ((n + 1) % N)); end
      for (int n = 0; n < N; n++) for (int m = 0; m < N; m++) conn_in[m][n] = conn_list[n][m];
      #1;
      for (int m = 0; m < N; m++)
        for (int n = 0; n < N; n++) begin
          checks++;
          if (routed[m][n] !== (conn_list[n][m] & spikes[n])) begin
            failures++;
            $display("FAIL: t=%0d routed[%0d][%0d]=%b", t, m, n, routed[m][n]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

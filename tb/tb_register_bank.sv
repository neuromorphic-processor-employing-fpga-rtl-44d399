// tb_register_bank: sends two complete random updates byte by byte and
// checks every register, the impulse_valid pulse and the byte counter. Also
// checks the update length formula: 898 bytes for 74 neurons, 4 for one.
module tb_register_bank;
  import snn_pkg::*;
  localparam int unsigned N  = 11;
  localparam int unsigned NB = (N + 7) / 8;
  logic clk = 0, rst_n = 0;
  logic [7:0] rx_data = '0;
  logic rx_valid = 0;
  logic [N-1:0][N-1:0] conn_in;
  logic [N-1:0][7:0] threshold, weight;
  logic [N-1:0] impulse;
  logic impulse_valid;
  logic [15:0] byte_count;
  int checks = 0, failures = 0, n_iv = 0;

  always #5 clk = ~clk;
  always @(posedge clk) if (impulse_valid) n_iv++;

  register_bank #(.N(N)) dut (.*);

  // Present one byte for one cycle (driven at the falling edge), then wait
  // `gap` idle cycles.
  task automatic put(input logic [7:0] b, input int gap = -1);
    if (gap < 0) gap = $urandom_range(0, 3);
    @(negedge clk); rx_data = b; rx_valid = 1;
    @(negedge clk); rx_valid = 0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    bit          e_cl[N][N];
    logic [7:0]  e_th[N], e_w[N];
    bit          e_imp[N];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    chk(bytes_per_update(74) == 898, "898 bytes for 74 neurons");
    chk(bytes_per_update(1) == 4, "4 bytes for one neuron");
    for (int rep = 0; rep < 2; rep++) begin
      for (int n = 0; n < N; n++) for (int m = 0; m < N; m++) e_cl[n][m] = 1'($urandom);
      for (int n = 0; n < N; n++) begin e_th[n] = 8'($urandom); e_w[n] = 8'($urandom); e_imp[n] = 1'($urandom); end
      for (int n = 0; n < N; n++)
        for (int b = 0; b < NB; b++) begin
          automatic logic [7:0] x = 8'($urandom);  // padding bits random
          for (int k = 0; k < 8; k++) if (8 * b + k < N) x[k] = e_cl[n][8 * b + k];
          put(x);
        end
      for (int n = 0; n < N; n++) put(e_th[n]);
      for (int n = 0; n < N; n++) put(e_w[n]);
      chk(byte_count == 16'(N * NB + 2 * N), $sformatf("byte counter before impulses %0d", byte_count));
      for (int b = 0; b < NB - 1; b++) begin
        automatic logic [7:0] x = 8'($urandom);
        for (int k = 0; k < 8; k++) if (8 * b + k < N) x[k] = e_imp[8 * b + k];
        put(x);
      end
      begin
        automatic logic [7:0] x = 8'($urandom);
        automatic int b = NB - 1;
        for (int k = 0; k < 8; k++) if (8 * b + k < N) x[k] = e_imp[8 * b + k];
        put(x, 0);
        chk(impulse_valid == 1'b1, "impulse_valid in the cycle after the last byte");
        @(negedge clk);
        chk(impulse_valid == 1'b0, "impulse_valid lasts one cycle");
      end
      chk(n_iv == rep + 1, "one impulse_valid per update");
      chk(byte_count == 0, "byte counter wraps");
      for (int n = 0; n < N; n++) begin
        for (int m = 0; m < N; m++) chk(conn_in[m][n] == e_cl[n][m], $sformatf("connection_list[%0d][%0d]", n, m));
        chk(threshold[n] == e_th[n], $sformatf("threshold[%0d]", n));
        chk(weight[n] == e_w[n], $sformatf("weight[%0d]", n));
        chk(impulse[n] == e_imp[n], $sformatf("impulse[%0d]", n));
      end
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

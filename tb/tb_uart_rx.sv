// tb_uart_rx: checks the UART receiver against bytes sent by a host model.
// Sends random bytes back to back and checks each one is received once and
// intact; then sends a frame with a 0 stop bit and checks it is dropped.
module tb_uart_rx;
  localparam int unsigned CPB = 16;
  logic clk = 0, rst_n = 0, rx, tx_unused = 1'b1;
  logic [7:0] data;
  logic valid;
  int checks = 0, failures = 0;
  logic [7:0] exp_q [$];
  int unsigned n_valid = 0;

  always #5 clk = ~clk;

  uart_host #(.CPB(CPB)) host (.clk(clk), .rx_line(rx), .tx_line(tx_unused));
  uart_rx #(.CLKS_PER_BIT(CPB)) dut (.clk(clk), .rst_n(rst_n), .rx(rx), .data(data), .valid(valid));

  always @(posedge clk) if (rst_n && valid) begin
    n_valid++;
    checks++;
    if (exp_q.size() == 0) begin
      failures++; $display("FAIL: unexpected byte %02x", data);
    end else begin
      automatic logic [7:0] e = exp_q.pop_front();
      if (data !== e) begin failures++; $display("FAIL: got %02x exp %02x", data, e); end
    end
  end

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (4) @(posedge clk);
    for (int i = 0; i < 40; i++) begin
      automatic logic [7:0] b = 8'($urandom);
      if (i == 0) b = 8'h00;
      if (i == 1) b = 8'hFF;
      exp_q.push_back(b);
      host.send_byte(b);
    end
    repeat (2 * CPB) @(posedge clk);
    checks++;
    if (n_valid != 40 || exp_q.size() != 0) begin
      failures++; $display("FAIL: %0d bytes received, %0d missing", n_valid, exp_q.size());
    end
    // frame with stop bit 0 must be dropped
    begin
      automatic logic [9:0] f = {1'b0, 8'hA5, 1'b0};
      for (int i = 0; i < 10; i++) begin host.rx_line <= f[i]; repeat (CPB) @(posedge clk); end
      host.rx_line <= 1'b1;
      repeat (3 * CPB) @(posedge clk);
    end
    checks++;
    if (n_valid != 40) begin failures++; $display("FAIL: byte with bad stop bit accepted"); end
    // receiver still works afterwards
    exp_q.push_back(8'h3C);
    host.send_byte(8'h3C);
    repeat (2 * CPB) @(posedge clk);
    checks++;
    if (n_valid != 41) begin failures++; $display("FAIL: no recovery after framing error"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

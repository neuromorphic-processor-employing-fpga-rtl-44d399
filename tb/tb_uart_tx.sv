// tb_uart_tx: the transmitter paced by a real clk_div. Sends single spike
// vectors and checks the decoded bytes; then sends several vectors while a
// frame is on the line and checks they arrive merged in the next frame.
module tb_uart_tx;
  localparam int unsigned N = 11, NB = 2, CPB = 12;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] data = '0;
  logic valid = 0;
  logic bit_tick, tick_clr, tx, busy, rx_unused;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  clk_div #(.DIV(CPB)) u_div (.clk, .rst_n, .clr(tick_clr), .tick(bit_tick));
  uart_tx #(.N(N)) dut (.clk, .rst_n, .data, .valid, .bit_tick, .tick_clr, .tx, .busy);
  uart_host #(.CPB(CPB)) host (.clk, .rx_line(rx_unused), .tx_line(tx));

  task automatic pulse(input logic [N-1:0] v);
    @(negedge clk); data = v; valid = 1; @(negedge clk); valid = 0; data = '0;
  endtask

  task automatic expect_frame(input logic [N-1:0] v, input string what);
    logic [15:0] e = 16'(v);
    int t = 0;
    while (host.got.size() < NB && t < 100 * CPB) begin @(posedge clk); t++; end
    checks++;
    if (host.got.size() < NB) begin failures++; $display("FAIL: %s: no frame", what); return; end
    for (int b = 0; b < NB; b++) begin
      logic [7:0] g = host.got.pop_front();
      checks++;
      if (g !== e[8*b +: 8]) begin failures++; $display("FAIL: %s byte %0d %02x exp %02x", what, b, g, e[8*b +: 8]); end
    end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (5) @(posedge clk);
    checks++; if (tx !== 1'b1) begin failures++; $display("FAIL: idle line not high"); end
    // frame timing: 2 bytes of 10 bits
    pulse(11'h5A3);
    t0 = $time;
    while (busy) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 < 20 * CPB - 2 || (t1 - t0) / 10 > 20 * CPB + 2) begin
      failures++; $display("FAIL: frame took %0d cycles", (t1 - t0) / 10);
    end
    expect_frame(11'h5A3, "single");
    for (int k = 0; k < 5; k++) begin
      automatic logic [N-1:0] v = N'($urandom) | 1;
      pulse(v);
      expect_frame(v, "random");
      repeat (3 * CPB) @(posedge clk);
    end
    // merge: first vector goes out, the next three are ORed into one frame
    pulse(11'h001);
    repeat (CPB) @(posedge clk);
    pulse(11'h010); pulse(11'h400); pulse(11'h002);
    expect_frame(11'h001, "first");
    expect_frame(11'h412, "merged");
    repeat (30 * CPB) @(posedge clk);
    checks++; if (host.got.size() != 0 || busy) begin failures++; $display("FAIL: extra frame"); end
    checks++; if (host.frame_errors != 0) begin failures++; $display("FAIL: stop bit errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000 * CPB) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

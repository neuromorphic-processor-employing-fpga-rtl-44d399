// tb_clk_div: checks the tick period and the restart on clr.
module tb_clk_div;
  localparam int unsigned DIV = 13;
  logic clk = 0, rst_n = 0, clr = 0, tick;
  int checks = 0, failures = 0;
  int cyc = 0, last = -1, n_ticks = 0;

  always #5 clk = ~clk;
  clk_div #(.DIV(DIV)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .tick(tick));

  int clr_at = -1, first_after_clr = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (clr) clr_at = cyc;
    if (tick && clr_at >= 0 && first_after_clr < 0) first_after_clr = cyc - clr_at;
    if (rst_n && tick) begin
      n_ticks++;
      if (last >= 0) begin
        checks++;
        if (cyc - last != DIV) begin failures++; $display("FAIL: tick period %0d", cyc - last); end
      end
      last = cyc;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (DIV * 10 + 3) @(posedge clk);
    checks++;
    if (n_ticks != 10) begin failures++; $display("FAIL: %0d ticks in 10 periods", n_ticks); end
    // clr restarts: next tick exactly DIV cycles after the clr cycle
    repeat (5) @(posedge clk);
    @(negedge clk) clr = 1;
    @(negedge clk) clr = 0;
    last = -1;
    repeat (DIV + 3) @(posedge clk);
    checks++;
    if (first_after_clr != DIV) begin failures++; $display("FAIL: first tick %0d cycles after clr", first_after_clr); end
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

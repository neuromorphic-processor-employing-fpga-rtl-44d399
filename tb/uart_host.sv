// uart_host: testbench model of the host side of the serial link.
//
// send_byte() drives one 8N1 frame on `rx_line` (LSB first, CPB clocks per
// bit). A receiver process decodes every frame on `tx_line` into the queue
// `got`, sampling each bit in its middle; a frame whose stop bit is 0 is
// counted in `frame_errors`.
module uart_host #(
  parameter int unsigned CPB = 16
) (
  input  logic clk,
  output logic rx_line,
  input  logic tx_line
);
  logic [7:0] got [$];
  int unsigned frame_errors = 0;

  initial rx_line = 1'b1;

  task automatic send_byte(input logic [7:0] b);
    logic [9:0] f;
    f = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      rx_line <= f[i];
      repeat (CPB) @(posedge clk);
    end
  endtask

  initial begin
    logic [7:0] b;
    forever begin
      @(posedge clk);
      if (tx_line == 1'b0) begin
        repeat (CPB / 2) @(posedge clk);
        for (int i = 0; i < 8; i++) begin
          repeat (CPB) @(posedge clk);
          b[i] = tx_line;
        end
        repeat (CPB) @(posedge clk);
        if (tx_line != 1'b1) frame_errors++;
        got.push_back(b);
        repeat (CPB / 2 - 1) @(posedge clk);
      end
    end
  end
endmodule

// clk_div: bit-rate tick generator (the processor's clock division module).
//
// Counts system clock cycles and emits a one-cycle `tick` every DIV cycles.
// The tick is used as a clock enable by the UART transmitter, so the whole
// design stays in the single 100 MHz clock domain. `clr` restarts the count so
// that a new transmit frame begins with a full bit period.
//
// Interface: clk, rst_n, clr, tick. Timing: after clr (or reset) in cycle t,
// tick is high in cycles t+DIV, t+2*DIV, ... (after reset the first tick
// comes DIV+1 cycles after the reset is released).
//
// From the paper: that a clock division module exists next to the UART
// blocks. Own choices: a 32-bit counter (matching the register count reported
// for the block), a tick rather than a divided clock, and the clr input.
module clk_div #(
  parameter int unsigned DIV = snn_pkg::clks_per_bit(snn_pkg::DEF_CLK_HZ, snn_pkg::DEF_BAUD)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  output logic tick
);

  logic [31:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (clr) begin
      // the clr cycle counts as the first cycle of the new period
      cnt  <= 32'(1 % DIV);
      tick <= (DIV == 1);
    end else if (cnt == 32'(DIV - 1)) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end

endmodule

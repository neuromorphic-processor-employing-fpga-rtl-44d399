// snn_pkg: constants and helper functions shared by the neuromorphic processor.
//
// The defaults describe the main configuration: a 74-neuron array (64 input
// neurons for an 8x8 binarised image plus 10 output neurons), a 100 MHz system
// clock and a 9600 baud UART. The register-bank byte layout is captured by
// bytes_per_update(): one connection-list row of ceil(N/8) bytes per neuron, one
// threshold byte and one weight byte per neuron, and ceil(N/8) impulse bytes.
// For N = 74 that is 740 + 74 + 74 + 10 = 898 bytes, and for N = 1 it is 4,
// the two counts the design is built to reproduce.
package snn_pkg;

  localparam int unsigned DEF_N        = 74;          // neurons in the array
  localparam int unsigned DEF_CLK_HZ   = 100_000_000; // system clock
  localparam int unsigned DEF_BAUD     = 9600;        // UART bit rate
  localparam int unsigned POT_W_DEF    = 8;           // membrane potential width

  // Clock cycles per UART bit, rounded to nearest (100 MHz / 9600 -> 10417).
  function automatic int unsigned clks_per_bit(int unsigned clk_hz, int unsigned baud);
    return (clk_hz + baud / 2) / baud;
  endfunction

  // Bytes needed for an n-bit vector.
  function automatic int unsigned bytes_for_bits(int unsigned n);
    return (n + 7) / 8;
  endfunction

  // Bytes in one complete register update for an n-neuron array.
  function automatic int unsigned bytes_per_update(int unsigned n);
    return n * bytes_for_bits(n) + 2 * n + bytes_for_bits(n);
  endfunction

  // Sections of the update stream, in the order they are received.
  typedef enum logic [1:0] {
    SEC_CONN   = 2'd0,
    SEC_THRESH = 2'd1,
    SEC_WEIGHT = 2'd2,
    SEC_IMPULSE= 2'd3
  } section_e;

endpackage

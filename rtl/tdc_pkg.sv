// tdc_pkg: constants and types shared by the TOT (time-over-threshold) TDC.
//
// The TDC measures both edges of a discriminator pulse in one carry-chain
// channel. A leading-edge record and a trailing-edge record go into the same
// FIFO; one flag bit tells them apart. This package fixes the word layout of
// those records and the default sizes.
//
// Sizes: the 250 MHz system clock (4 ns) is from the source design. The
// chain length of 52 CARRY4 cells is this design's choice: 52 cells give 104
// leading taps and 52 trailing taps, which matches the 105 and 51 bins seen
// in one clock period of the original hardware and covers a whole period.
// The coarse-counter width (24 bits) and the position of the flag bit are
// this design's choices; the source only says that "settled data bits" mark
// the edge type.
`timescale 1ps/1ps
package tdc_pkg;

  // System clock period in ps (250 MHz).
  localparam int unsigned CLK_PERIOD_PS = 4000;

  // Number of CARRY4 cells in the delay line.
  localparam int unsigned N_CARRY4_DEFAULT = 52;

  // Width of the latched coarse-time count.
  localparam int unsigned COARSE_W_DEFAULT = 24;

  // Fine-code width able to hold 0 .. 2*N_CARRY4 (the leading tap count).
  localparam int unsigned FINE_W_DEFAULT = $clog2(2 * N_CARRY4_DEFAULT + 1);

  // Edge type carried in every FIFO record.
  typedef enum logic {
    EDGE_LEADING  = 1'b0,
    EDGE_TRAILING = 1'b1
  } edge_e;

  // One FIFO record: flag, coarse count, fine code (MSB first).
  typedef struct packed {
    edge_e                         edge_type;
    logic [COARSE_W_DEFAULT-1:0]   coarse;
    logic [FINE_W_DEFAULT-1:0]     fine;
  } tdc_word_t;

  localparam int unsigned WORD_W = $bits(tdc_word_t);

endpackage

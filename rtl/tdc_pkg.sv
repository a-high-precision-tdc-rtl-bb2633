// tdc_pkg: widths and the output word layout shared by the multi-phase-clock TDC.
// The TDC measures the interval between two pulses as a coarse count of 1 GHz
// Clock1 periods plus a fine phase in eighths of that period, taken from four
// clocks 45 degrees apart. The 16-bit result word carries the polarity bit
// (which input came first), the 9-bit coarse difference and the two 3-bit fine
// phases. Widths follow the published design; the order of the two fine fields
// inside the low six bits is this design's choice (start above stop).
`timescale 1ps/1ps
package tdc_pkg;
  localparam int unsigned NPHASE   = 4;   // Clock1..Clock4
  localparam int unsigned FINE_W   = 3;   // eight phase bins per Clock1 period
  localparam int unsigned COARSE_W = 9;   // Gray counter width
  localparam int unsigned WORD_W   = 1 + COARSE_W + 2 * FINE_W;  // 16

  typedef struct packed {
    logic                polarity;    // 1: signal1 came first
    logic [COARSE_W-1:0] coarse;      // stop count - start count, modulo 2^COARSE_W
    logic [FINE_W-1:0]   fine_start;  // phase of the Start edge after a Clock1 rise
    logic [FINE_W-1:0]   fine_stop;   // phase of the Stop edge after a Clock1 rise
  } tdc_word_t;
endpackage

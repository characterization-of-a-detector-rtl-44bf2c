`timescale 1ps/1ps
// tdc_pkg: constants and the data-word type shared by the TDC blocks.
//
// Every coded event becomes one 32-bit word. The time occupies 26 bits in
// units of the delay-line step t0 = 120 ps (22 coarse bits counting periods of
// the 520 MHz reference, 4 fine bits from the 16-stage delay line), so the time
// code repeats every 2^26 * 120 ps = 8 ms. The 32-bit word, the 26-bit time,
// the 16 stages and the 17 channels are the published figures; the use of the
// remaining 6 bits (5-bit channel number, 1-bit rollover marker) is this
// design's choice.
package tdc_pkg;

  localparam int unsigned STAGES     = 16;  // delay-line stages per reference period
  localparam int unsigned FINE_BITS  = 4;   // log2(STAGES)
  localparam int unsigned TIME_BITS  = 26;  // time code width
  localparam int unsigned WORD_BITS  = 32;  // data word width
  localparam int unsigned CH_BITS    = 5;   // channel number width

  typedef struct packed {
    logic [CH_BITS-1:0]   channel;  // 0..15 stops, 16 event trigger (NSTOP in general)
    logic                 marker;   // 1: rollover marker, time holds the wrap instant
    logic [TIME_BITS-1:0] time_code; // units of t0
  } tdc_word_t;

endpackage

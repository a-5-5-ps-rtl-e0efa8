`timescale 1ps/1fs
// tdc_pkg: constants shared by the TDC channel blocks.
//
// The numbers that come from the design being reproduced are the system
// clock (500 MHz, a 2 ns period), four parallel delay chains of 280 taps
// each, and 20 carry taps per logic array block (LAB). The fine-code width
// follows from them: a ones count over 4 x 280 bits needs 11 bits. The
// fine-time resolution, the coarse-counter width and the number of hits per
// calibration-table update are choices of this implementation.
package tdc_pkg;
  // System clock period in picoseconds (500 MHz).
  localparam int unsigned CLK_PERIOD_PS  = 2000;
  // Parallel delay chains merged into one channel.
  localparam int unsigned N_CHAINS       = 4;
  // Delay elements (carry taps) per chain.
  localparam int unsigned TAPS_PER_CHAIN = 280;
  // Carry taps per LAB: 10 ALMs with 2 carry cells each.
  localparam int unsigned TAPS_PER_LAB   = 20;
  // Bits latched per channel and width of the ones-count fine code.
  localparam int unsigned TDL_BITS       = N_CHAINS * TAPS_PER_CHAIN;
  localparam int unsigned CODE_W         = $clog2(TDL_BITS + 1);
  // Number of distinct fine codes (0 .. TDL_BITS).
  localparam int unsigned N_CODES        = TDL_BITS + 1;
  // Calibrated fine time: unsigned fraction of one clock period, FINE_W bits
  // (one LSB = 2000 ps / 4096 = 0.49 ps); value 2**FINE_W is one full period.
  localparam int unsigned FINE_W         = 12;
  // Coarse counter width (wraps after 2**32 periods, about 8.6 s).
  localparam int unsigned COARSE_W       = 32;
  // log2 of the number of hits collected per calibration-table update.
  localparam int unsigned CAL_LOG2       = 18;
  // Final timestamp width: coarse periods and fine fraction.
  localparam int unsigned TS_W           = COARSE_W + FINE_W;
endpackage

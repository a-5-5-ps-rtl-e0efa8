`timescale 1ps/1fs
// tdc_top_tb: end-to-end test of tdc_top with 2^14 hits per calibration
// round instead of 2^18, so that it runs in seconds. See tdc_top_bench.
module tdc_top_tb;
  tdc_top_bench #(.FULL(1'b0)) bench ();
endmodule

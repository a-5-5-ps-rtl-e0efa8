`timescale 1ps/1fs
// tdc_top_full_tb: end-to-end test of tdc_top with every parameter at its
// default (2^18 hits per calibration round). See tdc_top_bench.
module tdc_top_full_tb;
  tdc_top_bench #(.FULL(1'b1)) bench ();
endmodule

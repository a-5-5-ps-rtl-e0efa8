`timescale 1ps/1fs
// timestamp_merge: forms the final timestamp of a hit from the coarse count
// of the clock edge that latched it and the calibrated fine time.
//
// The fine time is how long the hit had been travelling in the delay line
// when that edge came, so the hit happened fine before the edge:
//     ts = coarse * 2**FINE_W - fine
// in units of 2**-FINE_W clock periods, modulo 2**(COARSE_W+FINE_W).
//
// Interface: in_valid/in_coarse/in_fine/in_cal from the calibration stage,
// out_valid/out_ts/out_cal one clock later. Combining coarse and calibrated
// fine timestamps follows the described design; the subtraction form and
// the fixed-point format are this implementation's.
module timestamp_merge #(
  parameter  int unsigned COARSE_W = 32,
  parameter  int unsigned FINE_W   = 12,
  localparam int unsigned TS_W     = COARSE_W + FINE_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [COARSE_W-1:0] in_coarse,
  input  logic [FINE_W:0]     in_fine,
  input  logic                in_cal,
  output logic                out_valid,
  output logic [TS_W-1:0]     out_ts,
  output logic                out_cal
);
  always_ff @(posedge clk) begin
    out_valid <= rst_n && in_valid;
    out_ts    <= {in_coarse, FINE_W'(0)} - TS_W'(in_fine);
    out_cal   <= in_cal;
  end
endmodule

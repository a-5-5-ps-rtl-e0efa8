`timescale 1ps/1fs
// tdc_top: two identical merged-delay-line TDC channels sharing one coarse
// counter, the arrangement used to measure time intervals: the interval
// between a hit on channel 0 and a hit on channel 1 is the difference of
// their timestamps, in which the constant offsets of the two channels'
// calibrations largely cancel.
//
// Each channel (tdc_channel) holds four 280-tap carry-chain delay lines,
// their flip-flop banks, a ones-counter encoder, the online calibration and
// the timestamp merge. The 500 MHz system clock comes in on clk; it is
// produced outside this design.
//
// Interface: hit[NCH] are the hit inputs; for channel i, ts_valid[i] pulses
// with ts[i] (COARSE_W.FINE_W fixed point, units of clock periods) and
// ts_cal[i] (1 once that channel's calibration table exists). cal_ready and
// table_done report each channel's calibration; code_valid and code give the
// raw fine codes. Timing: a hit may arrive every second clock per channel;
// its timestamp appears 9 clocks after the edge that latched it.
module tdc_top
  import tdc_pkg::*;
#(
  parameter  int unsigned NCH        = 2,
  parameter  int unsigned NCHAINS    = N_CHAINS,
  parameter  int unsigned NTAPS      = TAPS_PER_CHAIN,
  parameter  int unsigned CAL_LOG2_P = CAL_LOG2,
  localparam int unsigned CW         = $clog2(NCHAINS * NTAPS + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NCH-1:0]      hit,
  output logic [NCH-1:0]      ts_valid,
  output logic [TS_W-1:0]     ts [NCH],
  output logic [NCH-1:0]      ts_cal,
  output logic [NCH-1:0]      cal_ready,
  output logic [NCH-1:0]      table_done,
  output logic [NCH-1:0]      code_valid,
  output logic [CW-1:0]       code [NCH]
);

  logic [COARSE_W-1:0] coarse;

  coarse_counter #(.W(COARSE_W)) u_coarse (
    .clk   (clk),
    .rst_n (rst_n),
    .count (coarse)
  );

  for (genvar i = 0; i < NCH; i++) begin : g_ch
    tdc_channel #(
      .NCHAINS    (NCHAINS),
      .NTAPS      (NTAPS),
      .CAL_LOG2_P (CAL_LOG2_P),
      .SEED       (i + 1)
    ) u_ch (
      .clk        (clk),
      .rst_n      (rst_n),
      .hit        (hit[i]),
      .coarse     (coarse),
      .ts_valid   (ts_valid[i]),
      .ts         (ts[i]),
      .ts_cal     (ts_cal[i]),
      .cal_ready  (cal_ready[i]),
      .table_done (table_done[i]),
      .code_valid (code_valid[i]),
      .code       (code[i])
    );
  end

endmodule

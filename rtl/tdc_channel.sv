`timescale 1ps/1fs
// tdc_channel: one TDC channel with a merged delay line of NCHAINS parallel
// chains. The same hit is fed to all chains; each chain's taps are latched
// by its flip-flop bank on every clock edge (both are modelled together in
// tdl_chain); the ones counter encodes
// the merged word into a fine code; the online calibration turns the code
// into a fine time; and the coarse count of the latching edge is combined
// with it into the timestamp.
//
// Because the chains sit at different places, the same moment is resolved
// by the taps of four chains that are offset from each other, so the merged
// line has about four times as many bins as one chain and the wide bins at
// LAB crossings of one chain are split by the taps of the others. The
// chains here are placed a quarter of an average LAB delay apart
// (CHAIN_STEP_PS), a modelling choice.
//
// Interface: hit in; coarse in (shared coarse counter); ts_valid/ts/ts_cal
// out; cal_ready and table_done from the calibration; code_valid/code give
// the raw fine code for monitoring. Latency from the latching edge to
// ts_valid: 7 (encoder) + 1 (table) + 1 (merge) = 9 clocks at the
// defaults.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter  int unsigned NCHAINS       = N_CHAINS,
  parameter  int unsigned NTAPS         = TAPS_PER_CHAIN,
  parameter  int unsigned LAB_TAPS      = TAPS_PER_LAB,
  parameter  int unsigned CAL_LOG2_P    = CAL_LOG2,
  parameter  int unsigned FINE_W_P      = FINE_W,
  parameter  int unsigned COARSE_W_P    = COARSE_W,
  parameter  int unsigned SEED          = 1,
  parameter  real         CHAIN_STEP_PS = 41.0,
  localparam int unsigned NBITS         = NCHAINS * NTAPS,
  localparam int unsigned CW            = $clog2(NBITS + 1),
  localparam int unsigned TSW           = COARSE_W_P + FINE_W_P
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  hit,
  input  logic [COARSE_W_P-1:0] coarse,
  output logic                  ts_valid,
  output logic [TSW-1:0]        ts,
  output logic                  ts_cal,
  output logic                  cal_ready,
  output logic                  table_done,
  output logic                  code_valid,
  output logic [CW-1:0]         code
);

  logic [NBITS-1:0] tdl;

  for (genvar c = 0; c < NCHAINS; c++) begin : g_chain
    tdl_chain #(
      .NTAPS          (NTAPS),
      .TAPS_PER_LAB   (LAB_TAPS),
      .SEED           (SEED * 16 + c),
      .CHAIN_OFFSET_PS(CHAIN_STEP_PS * c)
    ) u_tdl (
      .hit (hit),
      .clk (clk),
      .q   (tdl[c*NTAPS +: NTAPS])
    );
  end

  logic [COARSE_W_P-1:0] enc_tag, cal_tag;
  logic                  cal_valid, cal_ok;
  logic [FINE_W_P:0]     fine;

  ones_counter_encoder #(
    .NCHAINS (NCHAINS),
    .TAPS    (NTAPS),
    .GROUP   (LAB_TAPS),
    .TAG_W   (COARSE_W_P)
  ) u_enc (
    .clk     (clk),
    .rst_n   (rst_n),
    .tdl     (tdl),
    .tag_in  (coarse),
    .valid   (code_valid),
    .code    (code),
    .tag_out (enc_tag)
  );

  online_calibration #(
    .CODE_W   (CW),
    .N_CODES  (NBITS + 1),
    .CAL_LOG2 (CAL_LOG2_P),
    .FINE_W   (FINE_W_P),
    .TAG_W    (COARSE_W_P)
  ) u_cal (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (code_valid),
    .in_code    (code),
    .in_tag     (enc_tag),
    .out_valid  (cal_valid),
    .out_fine   (fine),
    .out_tag    (cal_tag),
    .out_cal    (cal_ok),
    .cal_ready  (cal_ready),
    .table_done (table_done)
  );

  timestamp_merge #(
    .COARSE_W (COARSE_W_P),
    .FINE_W   (FINE_W_P)
  ) u_ts (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (cal_valid),
    .in_coarse (cal_tag),
    .in_fine   (fine),
    .in_cal    (cal_ok),
    .out_valid (ts_valid),
    .out_ts    (ts),
    .out_cal   (ts_cal)
  );

endmodule

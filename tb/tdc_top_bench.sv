`timescale 1ps/1fs
// tdc_top_bench: end-to-end bench of the two-channel TDC, shared by
// tdc_top_tb (reduced calibration statistics) and tdc_top_full_tb (all
// parameters at their defaults). FULL selects which.
//
// Phase 1 (calibration): hits with random phase, one per channel every
//   three clocks, until both channels have built a calibration table.
// Phase 2 (maximum rate): a burst of hits one every two clocks
//   (250 Mhit/s at 500 MHz); every one must give a timestamp.
// Phase 3 (time intervals): hit pairs with channel 1 delayed by DELTA from
//   channel 0, at random phase, for intervals from 0 to 50 ns. For each
//   interval the mean and RMS of the measured interval are computed; the
//   RMS must stay below RMS_LIMIT_PS, derived from the calibration
//   statistics (5.4 ps at the default 2^18 hits per round), and the mean,
//   relative to the mean at zero interval, must be within the same margin
//   of the true interval. The delay-line model has no jitter, so the RMS
//   measures quantisation and calibration error only.
// Every hit must produce exactly one timestamp. Also counted and required
// at least once: latched words with bubbles, calibration-table updates,
// hits converted while the table was being rebuilt.
module tdc_top_bench #(
  parameter bit FULL = 1'b0
);
  import tdc_pkg::*;
  localparam int unsigned L      = FULL ? CAL_LOG2 : 14;
  localparam real         T      = real'(CLK_PERIOD_PS);
  // Expected RMS of an interval: each channel's table has a statistical
  // error of about T/sqrt(6N) for N hits per round; two channels, 50 %
  // margin, plus 2 ps for the bin quantisation.
  localparam real         RMS_LIMIT_PS  = 1.5 * $sqrt(2.0) * T / $sqrt(6.0 * real'(1 << L)) + 2.0;
  localparam real         MEAN_LIMIT_PS = RMS_LIMIT_PS;
  localparam int unsigned NPAIRS = 150;
  localparam int unsigned NDELTA = 6;
  localparam real DELTAS [NDELTA] = '{0.0, 3.83, 1000.0, 10000.0, 25000.0, 50000.0};

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] hit = '0;
  logic [1:0] ts_valid, ts_cal, cal_ready, table_done, code_valid;
  logic [TS_W-1:0] ts [2];
  logic [CODE_W-1:0] code [2];
  int checks = 0, failures = 0;
  // Internal probes: channel 0 calibration state and latched chain-0 word.
  logic [1:0]                probe_state;
  logic [TAPS_PER_CHAIN-1:0] probe_word;

  if (FULL) begin : g_full
    tdc_top dut (
      .clk(clk), .rst_n(rst_n), .hit(hit), .ts_valid(ts_valid), .ts(ts), .ts_cal(ts_cal),
      .cal_ready(cal_ready), .table_done(table_done), .code_valid(code_valid), .code(code));
    assign probe_state = dut.g_ch[0].u_ch.u_cal.state;
    assign probe_word  = dut.g_ch[0].u_ch.tdl[TAPS_PER_CHAIN-1:0];
  end else begin : g_small
    tdc_top #(.CAL_LOG2_P(L)) dut (
      .clk(clk), .rst_n(rst_n), .hit(hit), .ts_valid(ts_valid), .ts(ts), .ts_cal(ts_cal),
      .cal_ready(cal_ready), .table_done(table_done), .code_valid(code_valid), .code(code));
    assign probe_state = dut.g_ch[0].u_ch.u_cal.state;
    assign probe_word  = dut.g_ch[0].u_ch.tdl[TAPS_PER_CHAIN-1:0];
  end

  always #(T / 2) clk = ~clk;

  // Rising edges are at T/2 + n*T.
  function automatic real next_edge(input real x);
    return T / 2 + T * $ceil((x - T / 2) / T);
  endfunction

  // One hit pulse: rises at t_rise, falls 300 ps after the first clock edge
  // that comes at least 400 ps after the rise (the hit is then latched).
  int  sent [2];
  task automatic pulse(input int ch, input real t_rise);
    fork
      begin
        #(t_rise - $realtime) hit[ch] = 1'b1;
        #(next_edge(t_rise + 400.0) + 300.0 - $realtime) hit[ch] = 1'b0;
      end
    join_none
    sent[ch]++;
  endtask

  function automatic real rand_phase();
    return real'($urandom_range(0, 1999999)) / 1000.0;
  endfunction

  // Timestamps as they arrive.
  int  got [2];
  real ts_ps [2][$];
  always @(posedge clk) begin
    for (int c = 0; c < 2; c++)
      if (ts_valid[c]) begin
        got[c]++;
        ts_ps[c].push_back(real'(ts[c]) * T / real'(1 << FINE_W));
      end
  end

  // Mechanism counters.
  int n_table [2], n_bubble, n_conv_in_sweep, n_maxrate;
  always @(posedge clk) begin
    for (int c = 0; c < 2; c++) if (table_done[c]) n_table[c]++;
    if (code_valid[0] && probe_state != 2'd1) n_conv_in_sweep++;
  end


  // A latched chain word with a 0 below a 1 is a bubble.
  function automatic bit has_bubble(input logic [TAPS_PER_CHAIN-1:0] w);
    for (int i = 1; i < TAPS_PER_CHAIN; i++) if (w[i] && !w[i-1]) return 1'b1;
    return 1'b0;
  endfunction
  always @(negedge clk) begin
    if (has_bubble(probe_word)) n_bubble++;
  end

  task automatic drain();
    repeat (30) @(posedge clk);
    for (int c = 0; c < 2; c++) begin
      checks++;
      if (got[c] != sent[c]) begin
        failures++; $display("FAIL ch%0d sent %0d hits, got %0d timestamps", c, sent[c], got[c]);
        got[c] = sent[c];
      end
      ts_ps[c].delete();
    end
  endtask

  initial begin
    real base, t0, d, mean0, mean, rms, sum, sum2;
    int guard;
    for (int c = 0; c < 2; c++) begin sent[c] = 0; got[c] = 0; n_table[c] = 0; end
    n_bubble = 0; n_conv_in_sweep = 0; n_maxrate = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (N_CODES + 10) @(posedge clk);

    // Phase 1: calibration.
    guard = 0;
    while (!(cal_ready[0] && cal_ready[1]) && guard < (4 << L)) begin
      base = next_edge($realtime + 10.0) + T;
      pulse(0, base + rand_phase());
      pulse(1, base + rand_phase());
      #(3.0 * T);
      guard++;
    end
    checks++;
    if (!(cal_ready[0] && cal_ready[1])) begin failures++; $display("FAIL calibration never finished"); end
    drain();
    $display("RMS limit %0.2f ps", RMS_LIMIT_PS);
    $display("calibrated after %0d hit slots, %0d timestamps", guard, sent[0]);

    // Phase 2: maximum rate, one hit every two clocks.
    base = next_edge($realtime + 10.0);
    for (int k = 0; k < 200; k++) begin
      pulse(0, base + 2.0 * T * k + 100.0 + real'($urandom_range(0, 1399999)) / 1000.0);
      n_maxrate++;
    end
    #(2.0 * T * 201);
    drain();

    // Phase 3: time intervals.
    mean0 = 0.0;
    for (int di = 0; di < NDELTA; di++) begin
      d = DELTAS[di];
      sum = 0.0; sum2 = 0.0;
      for (int k = 0; k < NPAIRS; k++) begin
        base = next_edge($realtime + 10.0) + T;
        t0 = base + rand_phase();
        pulse(0, t0);
        pulse(1, t0 + d);
        #(next_edge(t0 + d) - $realtime + 3.0 * T);
        @(posedge clk);
        while (ts_ps[1].size() == 0 || ts_ps[0].size() == 0) @(posedge clk);
        begin
          automatic real m = ts_ps[1].pop_front() - ts_ps[0].pop_front();
          sum += m; sum2 += m * m;
        end
        got[0]--; got[1]--; sent[0]--; sent[1]--;
      end
      mean = sum / NPAIRS;
      rms  = $sqrt(sum2 / NPAIRS - mean * mean);
      if (di == 0) mean0 = mean;
      $display("interval %0.2f ps: mean %0.2f ps, RMS %0.2f ps", d, mean - mean0, rms);
      checks++;
      if (rms > RMS_LIMIT_PS) begin failures++; $display("FAIL RMS at %0.2f ps", d); end
      checks++;
      if ((mean - mean0 - d) > MEAN_LIMIT_PS || (mean - mean0 - d) < -MEAN_LIMIT_PS) begin
        failures++; $display("FAIL mean at %0.2f ps", d);
      end
    end
    drain();

    $display("mechanisms: tables %0d/%0d, bubble words %0d, conversions during rebuild %0d, max-rate hits %0d",
             n_table[0], n_table[1], n_bubble, n_conv_in_sweep, n_maxrate);
    checks++; if (n_table[0] == 0 || n_table[1] == 0) begin failures++; $display("FAIL no table update"); end
    checks++; if (n_bubble == 0) begin failures++; $display("FAIL no bubble seen"); end
    checks++; if (n_conv_in_sweep == 0) begin failures++; $display("FAIL no conversion during rebuild"); end
    checks++; if (n_maxrate == 0) begin failures++; $display("FAIL no max-rate burst"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T * real'(64 << L) + 100.0e6);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps/1fs
// tdc_single_chain_tb: the single-delay-line comparison configuration, two
// channels of one 280-tap chain each (tdc_top with NCHAINS = 1, 2^16 hits
// per calibration round). It histograms the fine codes of random-phase hits
// (a code-density test) and checks that the bins entered across a LAB
// boundary (codes 20, 40, 60, ...) are much wider than the others, as the
// carry chain crosses into a new LAB there. It then measures a zero time
// interval between the channels and checks that its RMS is clearly worse
// than the four-chain channel gives (about 2.1 ps at full statistics): the
// wide bins dominate.
module tdc_single_chain_tb;
  import tdc_pkg::*;
  localparam int unsigned L = 16, NT = TAPS_PER_CHAIN, CW1 = $clog2(NT + 1);
  localparam real T = real'(CLK_PERIOD_PS);
  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] hit = '0;
  logic [1:0] ts_valid, ts_cal, cal_ready, table_done, code_valid;
  logic [TS_W-1:0] ts [2];
  logic [CW1-1:0] code [2];
  int checks = 0, failures = 0;
  int hist [NT + 1];
  real ts_ps [2][$];

  tdc_top #(.NCHAINS(1), .CAL_LOG2_P(L)) dut (
    .clk(clk), .rst_n(rst_n), .hit(hit), .ts_valid(ts_valid), .ts(ts), .ts_cal(ts_cal),
    .cal_ready(cal_ready), .table_done(table_done), .code_valid(code_valid), .code(code));

  always #(T / 2) clk = ~clk;

  function automatic real next_edge(input real x);
    return T / 2 + T * $ceil((x - T / 2) / T);
  endfunction

  task automatic pulse(input int ch, input real t_rise);
    fork
      begin
        #(t_rise - $realtime) hit[ch] = 1'b1;
        #(next_edge(t_rise + 400.0) + 300.0 - $realtime) hit[ch] = 1'b0;
      end
    join_none
  endtask

  function automatic real rand_phase();
    return real'($urandom_range(0, 1999999)) / 1000.0;
  endfunction

  always @(posedge clk) begin
    if (code_valid[0]) hist[code[0]]++;
    for (int c = 0; c < 2; c++)
      if (ts_valid[c]) ts_ps[c].push_back(real'(ts[c]) * T / real'(1 << FINE_W));
  end

  initial begin
    real base, t0, sum, sum2, m, rms, wide, narrow;
    int n_wide, n_narrow, total;
    for (int k = 0; k <= NT; k++) hist[k] = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (NT + 10) @(posedge clk);
    while (!(cal_ready[0] && cal_ready[1])) begin
      base = next_edge($realtime + 10.0) + T;
      pulse(0, base + rand_phase());
      pulse(1, base + rand_phase());
      #(3.0 * T);
    end
    // Code density: mean count of LAB-entry codes against the other codes
    // inside the occupied range.
    total = 0; wide = 0; narrow = 0; n_wide = 0; n_narrow = 0;
    for (int k = 1; k <= NT; k++) total += hist[k];
    for (int k = 20; k < NT - 20; k++) begin
      if (hist[k] == 0 && hist[k-1] == 0) continue;
      if (k % 20 == 0) begin wide += hist[k]; n_wide++; end
      else begin narrow += hist[k]; n_narrow++; end
    end
    wide = wide / n_wide * T / total;
    narrow = narrow / n_narrow * T / total;
    $display("single chain: LAB-entry bins %0.1f ps, other bins %0.1f ps (%0d/%0d codes)",
             wide, narrow, n_wide, n_narrow);
    checks++;
    if (wide < 3.0 * narrow) begin failures++; $display("FAIL no wide bins at LAB boundaries"); end
    // Zero time interval.
    repeat (20) @(posedge clk);
    ts_ps[0].delete(); ts_ps[1].delete();
    sum = 0; sum2 = 0;
    for (int k = 0; k < 400; k++) begin
      base = next_edge($realtime + 10.0) + T;
      t0 = base + rand_phase();
      pulse(0, t0); pulse(1, t0);
      #(4.0 * T);
      while (ts_ps[0].size() == 0 || ts_ps[1].size() == 0) @(posedge clk);
      m = ts_ps[1].pop_front() - ts_ps[0].pop_front();
      sum += m; sum2 += m * m;
    end
    rms = $sqrt(sum2 / 400.0 - (sum / 400.0) * (sum / 400.0));
    $display("single chain: zero-interval RMS %0.2f ps", rms);
    checks++;
    if (rms < 6.0) begin failures++; $display("FAIL single-chain RMS unexpectedly small"); end
    checks++;
    if (rms > 30.0) begin failures++; $display("FAIL single-chain RMS too large"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(T * real'(8 << L));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

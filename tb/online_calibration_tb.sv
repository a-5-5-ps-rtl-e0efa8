`timescale 1ps/1fs
// online_calibration_tb: runs two calibration rounds on a reduced code range
// (37 codes, 2^8 hits per round) with a non-uniform code distribution and
// runs of back-to-back equal codes, which exercise the histogram forwarding.
// A histogram and table kept here predict every table entry,
//   table[k] = ((2*sum_{j<k} h[j] + h[k]) * 2^12) >> 9,
// and the entries are read back through the conversion path. Also checked:
// out_cal low before the first table, the one-clock conversion latency with
// the tag, and that the sweep ends N_CODES+2 clocks after the last hit.
module online_calibration_tb;
  localparam int unsigned CW = 6, NCODES = 37, L = 8, FW = 12, TW = 16;
  localparam int unsigned NHITS = 1 << L;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [CW-1:0] in_code = '0;
  logic [TW-1:0] in_tag = '0, out_tag;
  logic out_valid, out_cal, cal_ready, table_done;
  logic [FW:0] out_fine;
  int checks = 0, failures = 0;
  int hist [NCODES];
  int exp_tab [NCODES];
  int sent_in_round;

  online_calibration #(.CODE_W(CW), .N_CODES(NCODES), .CAL_LOG2(L), .FINE_W(FW), .TAG_W(TW)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_code(in_code), .in_tag(in_tag),
    .out_valid(out_valid), .out_fine(out_fine), .out_tag(out_tag), .out_cal(out_cal),
    .cal_ready(cal_ready), .table_done(table_done));

  always #1000 clk = ~clk;

  // Send one hit; returns the converted fine time and checks the latency.
  task automatic send(input int code, input bit count_it, output int fine, output bit cal);
    @(negedge clk);
    in_valid = 1'b1; in_code = CW'(code); in_tag = TW'($urandom());
    @(posedge clk); #1;
    in_valid = 1'b0;
    checks++;
    if (!out_valid || out_tag != in_tag) begin
      failures++; $display("FAIL latency/tag code=%0d", code);
    end
    fine = int'(out_fine); cal = out_cal;
    if (count_it) begin hist[code]++; sent_in_round++; end
  endtask

  function automatic int pick();
    int r = $urandom_range(0, 99);
    if (r < 40) return $urandom_range(3, 9);          // dense region
    if (r < 90) return $urandom_range(10, NCODES - 5); // medium
    return $urandom_range(0, NCODES - 1);             // anywhere
  endfunction

  task automatic build_expected();
    int cum = 0;
    for (int k = 0; k < NCODES; k++) begin
      exp_tab[k] = int'(((longint'(2 * cum + hist[k])) << FW) >> (L + 1));
      cum += hist[k];
      hist[k] = 0;
    end
    sent_in_round = 0;
  endtask

  task automatic fill_round();
    int f, run_code;
    bit c;
    while (sent_in_round < NHITS) begin
      if ($urandom_range(0, 5) == 0 && sent_in_round + 3 <= NHITS) begin
        // three back-to-back hits with the same code
        run_code = pick();
        @(negedge clk); in_valid = 1'b1; in_code = CW'(run_code);
        @(negedge clk); @(negedge clk); @(negedge clk);
        hist[run_code] += 3; sent_in_round += 3;
        in_valid = 1'b0;
      end else begin
        send(pick(), 1'b1, f, c);
        if ($urandom_range(0, 1) == 1) @(negedge clk);
      end
    end
  endtask

  task automatic wait_done();
    int cyc = 0;
    while (!table_done && cyc < 1000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != NCODES + 2) begin
      failures++; $display("FAIL sweep took %0d clocks, expected %0d", cyc, NCODES + 2);
    end
  endtask

  task automatic probe_table(input bit count_it);
    int f; bit c;
    for (int k = 0; k < NCODES; k++) begin
      send(k, count_it, f, c);
      checks++;
      if (!c || f != exp_tab[k]) begin
        failures++; $display("FAIL table[%0d]=%0d exp=%0d cal=%0d", k, f, exp_tab[k], c);
      end
    end
  endtask

  initial begin
    int f; bit c;
    for (int k = 0; k < NCODES; k++) hist[k] = 0;
    sent_in_round = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (NCODES + 5) @(posedge clk);
    // out_cal must be low before the first table.
    send(5, 1'b1, f, c);
    checks++; if (c || cal_ready) begin failures++; $display("FAIL cal before table"); end
    // Round 1.
    fill_round();
    wait_done();
    build_expected();
    checks++; if (!cal_ready) begin failures++; $display("FAIL cal_ready"); end
    // Probe (these hits start round 2), then finish round 2.
    probe_table(1'b1);
    fill_round();
    wait_done();
    build_expected();
    probe_table(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

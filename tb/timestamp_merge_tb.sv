`timescale 1ps/1fs
// timestamp_merge_tb: random coarse and fine values; checks the timestamp
// coarse*2^FINE_W - fine (modulo the timestamp width), the one-clock latency
// of valid and the pass-through of the calibration flag.
module timestamp_merge_tb;
  localparam int unsigned CW = 32, FW = 12, TW = CW + FW;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_cal, out_valid, out_cal;
  logic [CW-1:0] in_coarse;
  logic [FW:0]   in_fine;
  logic [TW-1:0] out_ts, exp_ts;
  int checks = 0, failures = 0;

  timestamp_merge #(.COARSE_W(CW), .FINE_W(FW)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_coarse(in_coarse),
    .in_fine(in_fine), .in_cal(in_cal), .out_valid(out_valid), .out_ts(out_ts),
    .out_cal(out_cal));

  always #1000 clk = ~clk;

  initial begin
    in_valid = 0; in_cal = 0; in_coarse = 0; in_fine = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid  = 1'($urandom_range(0, 1));
      in_cal    = 1'($urandom_range(0, 1));
      in_coarse = (n < 5) ? CW'(n) : $urandom();
      in_fine   = (n % 7 == 0) ? 13'(1 << FW) : 13'($urandom_range(0, (1 << FW)));
      exp_ts    = TW'((longint'(in_coarse) << FW) - longint'(in_fine));
      @(posedge clk); #1;
      checks++;
      if (out_valid != in_valid || out_cal != in_cal || (in_valid && out_ts != exp_ts)) begin
        failures++;
        $display("FAIL n=%0d ts=%h exp=%h", n, out_ts, exp_ts);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

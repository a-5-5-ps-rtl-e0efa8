`timescale 1ps/1fs
// coarse_counter_tb: checks reset to zero, one increment per clock against
// a reference count, and the wrap-around of a narrow counter.
module coarse_counter_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [31:0] count;
  logic [3:0]  count4;
  int checks = 0, failures = 0;
  longint ref_n;

  coarse_counter #(.W(32)) dut   (.clk(clk), .rst_n(rst_n), .count(count));
  coarse_counter #(.W(4))  dut4  (.clk(clk), .rst_n(rst_n), .count(count4));

  always #1000 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    #1;
    checks++; if (count != 0 || count4 != 0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1;
    ref_n = 0;
    for (int n = 0; n < 100; n++) begin
      @(posedge clk); #1;
      ref_n++;
      checks++;
      if (count != 32'(ref_n) || count4 != 4'(ref_n % 16)) begin
        failures++; $display("FAIL n=%0d count=%0d count4=%0d", n, count, count4);
      end
    end
    rst_n = 1'b0;
    @(posedge clk); #1;
    checks++; if (count != 0) begin failures++; $display("FAIL second reset"); end
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

`timescale 1ps/1fs
// tdl_chain_tb: launches hits into one 280-tap chain model at a phase that
// is stepped by 1 ps per clock relative to the clock, and watches the
// latched word. Checks: the number of ones in the word latched at the first
// edge after the hit grows with the time the hit has been travelling, and
// never decreases by more than a couple of bubbles; a hit that has
// travelled for one full clock period has not yet reached the last tap (the
// chain is longer than the period); the step in travel time needed to move
// onto the first tap of a LAB is larger than the average step (the LAB
// crossing); bubbles occur; and the word is all zero once the hit is gone.
module tdl_chain_tb;
  localparam int unsigned N = 280, LAB = 20;
  localparam real T = 2000.0;
  logic hit = 1'b0, clk = 1'b0;
  logic [N-1:0] q;
  int checks = 0, failures = 0;

  tdl_chain #(.NTAPS(N), .TAPS_PER_LAB(LAB), .SEED(5)) dut (.hit(hit), .clk(clk), .q(q));

  always #(T / 2) clk = ~clk;

  function automatic bit has_bubble(input logic [N-1:0] w);
    for (int i = 1; i < N; i++) if (w[i] && !w[i-1]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    int ones [int];        // travel time in ps -> ones count
    int prev, n_bubble, n_dec;
    real t_first [N];      // smallest travel time at which tap i is set
    real cross_sum, inner_sum;
    int n_cross, n_inner;
    for (int i = 0; i < N; i++) t_first[i] = -1.0;
    n_bubble = 0; n_dec = 0;
    @(posedge clk);
    // Travel time tt from 0 to 3000 ps in 1 ps steps: hit rises tt before an edge.
    for (int tt = 0; tt <= 3500; tt++) begin
      real edge_time;
      edge_time = T / 2 + T * $ceil(($realtime - T / 2) / T) + 4.0 * T;
      #(edge_time - tt - $realtime) hit = 1'b1;
      #(edge_time - $realtime + 1.0);
      ones[tt] = $countones(q);
      if (has_bubble(q)) n_bubble++;
      for (int i = 0; i < N; i++) if (q[i] && t_first[i] < 0.0) t_first[i] = real'(tt);
      hit = 1'b0;
      #(3.0 * T);
      checks++;
      if (q != '0) begin failures++; $display("FAIL word not cleared at tt=%0d", tt); end
    end
    prev = 0;
    for (int tt = 0; tt <= 3500; tt++) begin
      if (ones[tt] < prev - 2) n_dec++;
      if (ones[tt] > prev) prev = ones[tt];
    end
    checks++;
    if (n_dec != 0) begin failures++; $display("FAIL ones count fell %0d times", n_dec); end
    checks++;
    if (ones[2000] >= N) begin failures++; $display("FAIL chain shorter than one period"); end
    checks++;
    if (ones[3500] != N) begin failures++; $display("FAIL chain not full after 3.5 ns"); end
    cross_sum = 0; inner_sum = 0; n_cross = 0; n_inner = 0;
    for (int i = 1; i < N; i++) begin
      if (i % LAB == 0) begin cross_sum += t_first[i] - t_first[i-1]; n_cross++; end
      else begin inner_sum += t_first[i] - t_first[i-1]; n_inner++; end
    end
    checks++;
    if (cross_sum / n_cross < 3.0 * inner_sum / n_inner) begin
      failures++; $display("FAIL LAB crossing %0f vs %0f", cross_sum / n_cross, inner_sum / n_inner);
    end
    checks++;
    if (n_bubble == 0) begin failures++; $display("FAIL no bubbles"); end
    $display("ones at 1 period %0d, LAB step %0.1f ps, inner step %0.2f ps, %0d bubble words",
             ones[2000], cross_sum / n_cross, inner_sum / n_inner, n_bubble);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

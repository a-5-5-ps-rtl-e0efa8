`timescale 1ps/1fs
// tdl_chain: behavioural model of one tapped delay line (TDL) built from the
// cascaded carry logic of FPGA logic array blocks, together with the
// flip-flops beside every carry cell that latch the line on each rising
// clock edge. This is a simulation model of a process-specific structure,
// not synthesizable logic.
//
// The hit enters the chain through a LUT (modelled as ENTRY_DELAY_PS plus a
// per-chain placement offset CHAIN_OFFSET_PS) and ripples through NTAPS
// carry cells. Each LAB holds TAPS_PER_LAB cells (10 ALMs with two carry
// cells each); the crossing into the next LAB adds LAB_CROSS_PS, which is
// what makes one bin in every 20 much wider than the rest in a single
// chain. Carry-cell delays are spread pseudo-randomly (0.4 to 1.6 times
// TAP_DELAY_PS) from a hash of the tap index and SEED. Every tap also has
// an extra delay of up to SKEW_PS for the clock and routing skew of its
// flip-flop; where that skew exceeds the delay of the neighbouring cell the
// latched word shows a "bubble" (a 0 below a 1), which the ones counter
// downstream tolerates.
//
// How it is evaluated: tap i sees the hit arrival_i picoseconds late, so at
// a clock edge at time t flip-flop i latches the level the hit input had at
// t - arrival_i. The model keeps the recent hit edges and computes the
// whole latched word at each edge, which is exact for this delay model and
// far faster to simulate than one delayed net per tap.
//
// The tap count, the 20 taps per LAB, the hit entering through a LUT and
// the flip-flops clocked by the system clock follow the described design.
// All delay values are this model's own, chosen so that one chain
// (about 280 x 6.5 ps + 13 x 40 ps = 2.34 ns) is longer than the 2 ns clock
// period and so that four chains placed a quarter LAB apart give fine bins
// of about 2 ps.
//
// Interface: hit (input, any time), clk, q[NTAPS] (the word latched at the
// last rising edge, tap 0 first). Latency: one clock edge.
module tdl_chain #(
  parameter int unsigned NTAPS           = 280,
  parameter int unsigned TAPS_PER_LAB    = 20,
  parameter int unsigned SEED            = 1,
  parameter real         ENTRY_DELAY_PS  = 150.0,
  parameter real         CHAIN_OFFSET_PS = 0.0,
  parameter real         TAP_DELAY_PS    = 6.5,
  parameter real         LAB_CROSS_PS    = 40.0,
  parameter real         SKEW_PS         = 8.0
) (
  input  logic             hit,
  input  logic             clk,
  output logic [NTAPS-1:0] q
);

  // Pseudo-random fraction in [0,1) from an integer hash of (index, salt).
  function automatic real frac(input int unsigned idx, input int unsigned salt);
    int unsigned h;
    h = idx * 32'h9E37_79B1 + salt * 32'h85EB_CA6B + 32'h1234_5677;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return real'(h % 1000) / 1000.0;
  endfunction

  // Delay from the hit input to flip-flop i.
  real arrival [NTAPS];
  real max_arrival;

  initial begin
    real carry_t;
    carry_t = ENTRY_DELAY_PS + CHAIN_OFFSET_PS;
    max_arrival = 0.0;
    for (int i = 0; i < NTAPS; i++) begin
      carry_t += TAP_DELAY_PS * (0.4 + 1.2 * frac(i, SEED));
      if (i % TAPS_PER_LAB == 0 && i != 0) carry_t += LAB_CROSS_PS;
      arrival[i] = carry_t + 0.1 + SKEW_PS * frac(i, SEED + 7919);
      if (arrival[i] > max_arrival) max_arrival = arrival[i];
    end
  end

  // Recent edges of the hit input: time and the level after the edge.
  real edge_t [$];
  bit  edge_v [$];
  bit  level_before;   // level before the oldest kept edge

  initial level_before = 1'b0;

  always @(hit) begin
    edge_t.push_back($realtime);
    edge_v.push_back(hit);
  end

  // Level of the hit input at time t.
  function automatic bit level_at(input real t);
    bit v = level_before;
    for (int e = 0; e < edge_t.size(); e++) begin
      if (edge_t[e] <= t) v = edge_v[e];
      else break;
    end
    return v;
  endfunction

  always @(posedge clk) begin
    automatic real now = $realtime;
    for (int i = 0; i < NTAPS; i++) q[i] <= level_at(now - arrival[i]);
    // Forget edges no tap can still see.
    while (edge_t.size() > 1 && edge_t[1] < now - max_arrival) begin
      level_before = edge_v[0];
      void'(edge_t.pop_front());
      void'(edge_v.pop_front());
    end
  end

endmodule

`timescale 1ps/1fs
// ones_counter_encoder: converts the latched state of the merged delay line
// (NCHAINS chains of TAPS bits) into a binary fine code equal to the number
// of ones in it, and flags the samples that hold a new hit.
//
// Counting ones instead of searching for the 0->1 transition makes the code
// insensitive to bubbles: a tap latched out of order still adds exactly one
// to the count, so no delay element is lost and every tap of all four chains
// remains a separate bin. The count is the number of taps the hit has
// passed when the clock edge came, so a larger code means an earlier hit.
//
// Pipeline: the input word is cut into groups of GROUP bits (20, one LAB)
// whose ones are counted in the first stage; a binary adder tree with one
// register per level then sums the group counts. Latency is
// 1 + clog2(ceil(NCHAINS*TAPS/GROUP)) clocks (7 at the defaults) and a new
// word is accepted every clock.
//
// Hit detection: a sample holds a new hit when the first tap of any chain is
// 1 and none was in the previous sample. The hit must therefore stay
// asserted until the next clock edge and be low for at least one edge
// before the next hit, which allows one hit every two clocks (250 Mhit/s at
// 500 MHz). tag_in (the coarse counter) is carried along with the code.
//
// The ones-counting encoder and the 4 x 280 input follow the described
// design; the grouping, adder tree, pipelining and hit detection are this
// implementation's own.
module ones_counter_encoder #(
  parameter  int unsigned NCHAINS = 4,
  parameter  int unsigned TAPS    = 280,
  parameter  int unsigned GROUP   = 20,
  parameter  int unsigned TAG_W   = 32,
  localparam int unsigned NBITS   = NCHAINS * TAPS,
  localparam int unsigned CODE_W  = $clog2(NBITS + 1),
  localparam int unsigned NG      = (NBITS + GROUP - 1) / GROUP,
  localparam int unsigned LEVELS  = (NG > 1) ? $clog2(NG) : 1,
  localparam int unsigned NGP     = 1 << LEVELS,
  localparam int unsigned LATENCY = 1 + LEVELS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NBITS-1:0]  tdl,
  input  logic [TAG_W-1:0]  tag_in,
  output logic              valid,
  output logic [CODE_W-1:0] code,
  output logic [TAG_W-1:0]  tag_out
);

  // Input word padded with zeros to a whole number of groups.
  logic [NG*GROUP-1:0] tdl_pad;
  assign tdl_pad = {{(NG*GROUP-NBITS){1'b0}}, tdl};

  // Hit detection on the first tap of every chain.
  logic any_first, any_first_q, new_hit;
  always_comb begin
    any_first = 1'b0;
    for (int c = 0; c < NCHAINS; c++) any_first |= tdl[c*TAPS];
  end
  assign new_hit = any_first && !any_first_q;

  // Number of ones in one group.
  function automatic logic [CODE_W-1:0] ones(input logic [GROUP-1:0] bits);
    ones = '0;
    for (int b = 0; b < GROUP; b++) ones += CODE_W'(bits[b]);
  endfunction

  // Adder-tree registers: lvl[0] holds group counts, lvl[LEVELS][0] the sum.
  logic [CODE_W-1:0] lvl [LEVELS+1][NGP];
  logic              vld [LEVELS+1];
  logic [TAG_W-1:0]  tag [LEVELS+1];

  always_ff @(posedge clk) begin
    any_first_q <= rst_n ? any_first : 1'b1;
    for (int g = 0; g < NGP; g++)
      lvl[0][g] <= (g < NG) ? ones(tdl_pad[g*GROUP +: GROUP]) : '0;
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < NGP; i++)
        lvl[l][i] <= (i < (NGP >> l)) ? lvl[l-1][2*i] + lvl[l-1][2*i+1] : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int l = 0; l <= LEVELS; l++) vld[l] <= 1'b0;
    end else begin
      vld[0] <= new_hit;
      for (int l = 1; l <= LEVELS; l++) vld[l] <= vld[l-1];
    end
    tag[0] <= tag_in;
    for (int l = 1; l <= LEVELS; l++) tag[l] <= tag[l-1];
  end

  assign valid   = vld[LEVELS];
  assign code    = lvl[LEVELS][0];
  assign tag_out = tag[LEVELS];

endmodule

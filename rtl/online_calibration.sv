`timescale 1ps/1fs
// online_calibration: code-density calibration of the fine codes, rebuilt
// continuously while the TDC runs, and conversion of every code into a
// calibrated fine time.
//
// Principle: hits that are uncorrelated with the clock fall uniformly over
// the period, so the share of hits that produce a code is that code's bin
// width in units of the period. After 2**CAL_LOG2 hits have been counted in
// a histogram, a sweep over all codes builds the table entry of code k as
// the centre of its bin,
//     table[k] = ((2*sum_{j<k} hist[j] + hist[k]) * 2**FINE_W) >> (CAL_LOG2+1)
// (a fraction of the clock period, FINE_W fractional bits, 2**FINE_W = one
// period), clears the histogram and starts collecting again. The time is
// measured from the earliest possible code, so a constant offset remains
// that cancels in any time interval taken between channels or hits.
//
// Operation:
//   CLEAR  after reset, zero the histogram (N_CODES clocks).
//   ACCUM  count hits: histogram read-modify-write in two pipeline stages
//          with forwarding, so one hit per clock can be taken.
//   DRAIN  one clock for the last histogram write.
//   SWEEP  one code per clock: write the table entry, clear the bin.
// Hits arriving outside ACCUM are converted but not counted. The table is
// rewritten entry by entry while conversions go on; every entry read is a
// whole old or whole new value. out_cal is 0 until the first table exists.
//
// Interface: in_valid/in_code/in_tag from the ones-counter encoder;
// out_valid/out_fine/out_tag/out_cal one clock later. cal_ready is set
// after the first sweep; table_done pulses at the end of each sweep.
//
// That the bins are measured by a code-density test and the fine time is
// calibrated by an online-updated table follows the described design; the
// memory organisation, the update schedule, the hit count per update and
// the centre-of-bin rule are this implementation's own.
module online_calibration #(
  parameter  int unsigned CODE_W   = 11,
  parameter  int unsigned N_CODES  = 1121,
  parameter  int unsigned CAL_LOG2 = 18,
  parameter  int unsigned FINE_W   = 12,
  parameter  int unsigned TAG_W    = 32,
  localparam int unsigned HIST_W   = CAL_LOG2 + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [CODE_W-1:0] in_code,
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [FINE_W:0]   out_fine,
  output logic [TAG_W-1:0]  out_tag,
  output logic              out_cal,
  output logic              cal_ready,
  output logic              table_done
);

  typedef enum logic [1:0] {CLEAR, ACCUM, DRAIN, SWEEP} state_t;
  state_t state;

  // Histogram (1 read, 1 write port) and calibration table (1 read, 1 write).
  logic [HIST_W-1:0] hist [N_CODES];
  logic [FINE_W:0]   lut  [N_CODES];

  logic [CODE_W-1:0] addr;        // CLEAR / SWEEP code pointer
  logic [HIST_W-1:0] hits;        // hits counted in this round
  logic [HIST_W:0]   cum;         // hits in codes below the one being swept

  // Histogram read stage.
  logic              rd_en;
  logic [CODE_W-1:0] rd_addr;
  logic [HIST_W-1:0] rd_data;
  logic              a_acc, a_swp;   // what the read in flight is for
  logic [CODE_W-1:0] a_addr;
  // Last histogram write, kept for forwarding.
  logic              w_en;
  logic [CODE_W-1:0] w_addr;
  logic [HIST_W-1:0] w_data;

  logic accept, last_addr;
  assign accept    = (state == ACCUM) && in_valid && (32'(in_code) < N_CODES);
  assign last_addr = (32'(addr) == N_CODES - 1);
  assign rd_en     = accept || (state == SWEEP);
  assign rd_addr   = (state == SWEEP) ? addr : in_code;

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= hist[rd_addr];
  end

  // Stage-2 histogram update value, with forwarding of the last write.
  logic [HIST_W-1:0] base, inc;
  logic [HIST_W+FINE_W+1:0] scaled;
  assign base   = (w_en && w_addr == a_addr) ? w_data : rd_data;
  assign inc    = base + 1'b1;
  assign scaled = (HIST_W+FINE_W+2)'(({cum, 1'b0} + (HIST_W+2)'(rd_data))) << FINE_W;

  always_ff @(posedge clk) begin
    w_en <= 1'b0;
    if (state == CLEAR) begin
      hist[addr] <= '0;
    end else if (a_acc) begin
      hist[a_addr] <= inc;
      w_en   <= 1'b1;
      w_addr <= a_addr;
      w_data <= inc;
    end else if (a_swp) begin
      hist[a_addr] <= '0;
      w_en   <= 1'b1;
      w_addr <= a_addr;
      w_data <= '0;
    end
    if (a_swp) lut[a_addr] <= scaled[CAL_LOG2+1 +: FINE_W+1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= CLEAR;
      addr       <= '0;
      hits       <= '0;
      cum        <= '0;
      a_acc      <= 1'b0;
      a_swp      <= 1'b0;
      cal_ready  <= 1'b0;
      table_done <= 1'b0;
    end else begin
      a_acc      <= accept;
      a_swp      <= (state == SWEEP);
      a_addr     <= rd_addr;
      table_done <= 1'b0;
      if (a_swp) cum <= cum + (HIST_W+1)'(rd_data);
      unique case (state)
        CLEAR: begin
          addr <= addr + 1'b1;
          if (last_addr) begin
            addr  <= '0;
            state <= ACCUM;
          end
        end
        ACCUM: if (accept) begin
          hits <= hits + 1'b1;
          if (hits == HIST_W'((1 << CAL_LOG2) - 1)) state <= DRAIN;
        end
        DRAIN: begin
          hits  <= '0;
          cum   <= '0;
          state <= SWEEP;
        end
        SWEEP: begin
          addr <= addr + 1'b1;
          if (last_addr) begin
            addr  <= '0;
            state <= ACCUM;
          end
        end
        default: state <= CLEAR;
      endcase
      // The last sweep write lands the clock after SWEEP ends.
      if (a_swp && 32'(a_addr) == N_CODES - 1) begin
        cal_ready  <= 1'b1;
        table_done <= 1'b1;
      end
    end
  end

  // Conversion: one-clock table lookup.
  always_ff @(posedge clk) begin
    out_fine <= lut[(32'(in_code) < N_CODES) ? in_code : CODE_W'(N_CODES - 1)];
    out_tag  <= in_tag;
    out_cal  <= cal_ready;
    out_valid <= rst_n && in_valid;
  end

endmodule

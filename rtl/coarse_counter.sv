`timescale 1ps/1fs
// coarse_counter: free-running binary counter clocked by the system clock.
// Its value labels every clock edge and is the coarse part of a timestamp;
// the delay line only interpolates inside one period.
//
// Interface: count[W] increments by one on every rising clock edge and wraps
// at 2**W. Synchronous active-low reset to zero. The counter running at the
// system clock rate follows the described design; the width W (32) and the
// reset are this implementation's choices.
module coarse_counter #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [W-1:0] count
);
  always_ff @(posedge clk) begin
    if (!rst_n) count <= '0;
    else        count <= count + 1'b1;
  end
endmodule

`timescale 1ps/1fs
// coarse_counter -- free-running clock counter giving the coarse time.
//
// The fine (tapped delay line) measurement only resolves the position of a
// hit within one clock period; the count of the 160 MHz clock gives the rest.
// One counter is shared by all chains and channels so that their coarse
// times agree. The count is W bits wide and wraps (24 bits by default, about
// 105 ms at 160 MHz; the width is this design's choice). After reset the
// count is 0; it increments on every rising clock edge while en is high.
//
// Interface: clk, rst_n (asynchronous, active low), en -> count.
module coarse_counter #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] count
);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)  count <= '0;
    else if (en) count <= count + 1'b1;

endmodule

`timescale 1ps/1fs
// therm_encoder -- turns the sampled thermometer code of one tapped delay line
// into a binary fine code.
//
// The fine code is the number of high taps (a ones count). When the hit edge
// has passed n taps at the sampling edge, taps 0..n-1 read high and the code
// is n. Counting ones instead of searching for the 1->0 transition makes the
// code insensitive to "bubbles" (isolated wrong taps near the edge), which
// carry-chain TDLs are known for. The paper speaks of binary fine codes but
// does not give the encoder; the ones count is this design's choice.
//
// Interface: combinational, therm[N_TAPS-1:0] -> fine[FINE_W-1:0].
module therm_encoder #(
  parameter int unsigned N_TAPS = 276,
  parameter int unsigned FINE_W = $clog2(N_TAPS + 1)
) (
  input  logic [N_TAPS-1:0] therm,
  output logic [FINE_W-1:0] fine
);

  always_comb begin
    fine = '0;
    for (int k = 0; k < N_TAPS; k++)
      fine = fine + FINE_W'(therm[k]);
  end

endmodule

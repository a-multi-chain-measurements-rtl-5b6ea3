`timescale 1ps/1fs
// plain_tdc -- the digital part of one plain (single-chain) TDC: hit detection,
// fine encoding and coarse time stamping of one sampled tapped delay line.
//
// `taps` is the thermometer code captured by the slice flip-flops at each
// clock edge. A hit is recognised when tap 0 reads high at an edge and read
// low at the edge before: the hit edge entered the chain during that clock
// period. The raw code is then the coarse count of that sampling edge and
// the ones count of the taps (therm_encoder), i.e. how far the edge had
// travelled, so the hit time is coarse * T_clk minus the travel time. The
// coarse input is taken one edge after the sample, when it equals the count
// of the sampling edge. The hit must stay high longer than the chain is long
// (about one period) and the next hit must not come before tap 0 has been
// seen low: two clock periods of dead time. These rules and the detection
// scheme are this design's choices; the paper describes the chain and says
// each chain yields one raw code per hit.
//
// Timing: raw/valid are registered and appear one clock after the edge that
// sampled the hit; valid is a one-cycle pulse.
module plain_tdc
  import mcatdc_pkg::*;
#(
  parameter int unsigned N_TAPS = mcatdc_pkg::TAPS_PER_CHAIN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_TAPS-1:0] taps,     // sampled tap flip-flops
  input  coarse_t           coarse,   // shared coarse counter
  output raw_code_t         raw,
  output logic              valid
);

  logic  tap0_prev;
  fine_t fine_c;

  therm_encoder #(.N_TAPS(N_TAPS), .FINE_W(FINE_W)) u_enc (
    .therm(taps),
    .fine (fine_c)
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      tap0_prev <= 1'b1;   // no hit can be reported in the first cycle
      valid     <= 1'b0;
      raw       <= '0;
    end else begin
      tap0_prev <= taps[0];
      valid     <= taps[0] && !tap0_prev;
      if (taps[0] && !tap0_prev) begin
        raw.coarse <= coarse;
        raw.fine   <= fine_c;
      end
    end

endmodule

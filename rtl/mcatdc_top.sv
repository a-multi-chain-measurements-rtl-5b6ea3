`timescale 1ps/1fs
// mcatdc_top -- two-channel multi-chain measurements averaging TDC.
//
// N_CH independent channels (mcatdc_channel, M = 8 chains each) share one
// free-running coarse counter clocked at 160 MHz, so their time stamps lie on
// one time axis and the difference of two channels' times is a time
// interval. The two channels with eight chains each and the 160 MHz clock
// follow the presented TDC; sharing one counter and the common cal_start
// are this design's choices.
//
// Time stamps t_final[c] are in units of T_clk / 2**FRAC_W (6.25 ns / 65536,
// about 0.095 ps): the upper COARSE_W bits are the clock count, the lower
// FRAC_W bits the position within the period. One t_valid pulse per hit.
// state[c] tells whether channel c is calibrated (CH_READY).
//
// The tapped delay lines and delay cells inside are behavioural models of
// FPGA carry logic; the rest is synthesizable.
module mcatdc_top
  import mcatdc_pkg::*;
#(
  parameter int unsigned N_CH      = mcatdc_pkg::N_CHANNELS,
  parameter int unsigned M         = mcatdc_pkg::M_CHAINS,
  parameter int unsigned N_TAPS    = mcatdc_pkg::TAPS_PER_CHAIN,
  parameter int unsigned LOG2_NCAL = 16,
  parameter int unsigned LOG2_NOFF = 10
) (
  input  logic      clk,          // 160 MHz
  input  logic      rst_n,
  input  logic      hit_in    [N_CH],
  input  logic      cal_start,
  output ch_state_e state     [N_CH],
  output tdc_time_t t_final   [N_CH],
  output logic      t_valid   [N_CH],
  output logic      drop      [N_CH]
);

  coarse_t coarse;

  coarse_counter #(.W(COARSE_W)) u_coarse (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (1'b1),
    .count(coarse)
  );

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    mcatdc_channel #(
      .M(M), .N_TAPS(N_TAPS), .LOG2_NCAL(LOG2_NCAL), .LOG2_NOFF(LOG2_NOFF),
      .SEED_BASE(c + 1)
    ) u_ch (
      .clk      (clk),
      .rst_n    (rst_n),
      .hit_in   (hit_in[c]),
      .coarse   (coarse),
      .cal_start(cal_start),
      .state    (state[c]),
      .t_final  (t_final[c]),
      .t_valid  (t_valid[c]),
      .drop     (drop[c])
    );
  end

endmodule

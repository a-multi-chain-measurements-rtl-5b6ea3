`timescale 1ps/1fs
// mcatdc_channel -- one multi-chain measurements averaging TDC channel.
//
// The hit drives M tapped delay lines in parallel; between the inputs of two
// adjacent chains sits a fixed delay cell, so chain m sees the hit (m-1)
// cell delays later. Each chain is a complete plain TDC (tdl_chain sampled
// by the slice flip-flops, plain_tdc) and gives its own raw code for the
// hit. Each raw code is converted to a time by the chain's own INL table
// (inl_cor), the M times are gathered (hit_aligner), and the averager
// subtracts each chain's offset T_D(m) and takes the mean. Because the delay
// cells shift the chains by fractions of a bin against each other, the mean
// resolves steps about M times finer than one chain's bin, and the
// independent quantisation errors partly cancel. This structure (Fig. 1 and
// Fig. 2 of the TDC's description) and M = 8 follow the presented design;
// the paper does the INL correction and averaging in PC software and notes
// they can as well be done in the FPGA, which is what this channel does.
//
// Calibration sequence (this design's choice of control): after reset the
// channel is in CH_UNCAL and converts codes with the nominal bin. A
// cal_start pulse moves it to CH_DENSITY: every chain collects
// 2**LOG2_NCAL codes from random hits and builds its table. It then moves to
// CH_OFFSET: 2**LOG2_NOFF hits, now with tables in use, give T_D(m). Then
// CH_READY: tables and offsets are used for every hit. Hits must arrive,
// uncorrelated with the clock, during calibration. Offsets are applied only
// in CH_READY.
//
// The delay lines and delay cells are behavioural models (tdl_chain,
// chain_delay_cell); everything after the tap flip-flops is in the
// synthesizable mcatdc_core.
//
// Interface: hit_in (asynchronous), shared coarse count, cal_start pulse;
// t_final/t_valid one pulse per hit, in units of T_clk / 2**FRAC_W.
// Latency from the sampling edge to t_valid: 4 or 5 clocks (one more if the
// chains split across two edges). drop pulses when a hit is seen by only
// some chains.
module mcatdc_channel
  import mcatdc_pkg::*;
#(
  parameter int unsigned M         = mcatdc_pkg::M_CHAINS,
  parameter int unsigned N_TAPS    = mcatdc_pkg::TAPS_PER_CHAIN,
  parameter int unsigned LOG2_NCAL = 16,
  parameter int unsigned LOG2_NOFF = 10,
  parameter real         TAP_PS    = 6250.0 / 260.0,
  parameter real         SPREAD    = 0.6,
  parameter real         DELAY_PS  = (6250.0 / 260.0) * (1.0 + 1.0 / 8.0),
  parameter int unsigned SEED_BASE = 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      hit_in,
  input  coarse_t   coarse,
  input  logic      cal_start,
  output ch_state_e state,
  output tdc_time_t t_final,
  output logic      t_valid,
  output logic      drop
);

  logic              chain_hit [M];
  logic [N_TAPS-1:0] taps      [M];

  assign chain_hit[0] = hit_in;

  for (genvar i = 0; i < M; i++) begin : g_chain
    if (i > 0) begin : g_dly
      chain_delay_cell #(.DELAY_PS(DELAY_PS)) u_dly (
        .in (chain_hit[i-1]),
        .out(chain_hit[i])
      );
    end

    tdl_chain #(
      .N_TAPS(N_TAPS), .TAP_PS(TAP_PS), .SPREAD(SPREAD),
      .SEED  (SEED_BASE * 64 + i)
    ) u_tdl (
      .hit(chain_hit[i]),
      .clk(clk),
      .q  (taps[i])
    );
  end

  mcatdc_core #(
    .M(M), .N_TAPS(N_TAPS), .LOG2_NCAL(LOG2_NCAL), .LOG2_NOFF(LOG2_NOFF)
  ) u_core (
    .clk      (clk),
    .rst_n    (rst_n),
    .taps     (taps),
    .coarse   (coarse),
    .cal_start(cal_start),
    .state    (state),
    .t_final  (t_final),
    .t_valid  (t_valid),
    .drop     (drop)
  );

endmodule

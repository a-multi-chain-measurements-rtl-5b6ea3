`timescale 1ps/1fs
// mcatdc_pkg -- constants and types shared by the multi-chain averaging TDC.
//
// Time inside the design is an unsigned fixed-point number whose integer
// part is the coarse clock count and whose FRAC_W-bit fraction is a part of
// one clock period: one time unit (TU) is T_clk / 2**FRAC_W, i.e. about
// 0.095 ps at 160 MHz. Coarse count width, fraction width and the fine code
// width are this design's choices; the tap count (276), the clock (160 MHz,
// 6.25 ns) and the chain count (8) are the values of the presented TDC.
package mcatdc_pkg;

  // Chains per channel (M) and channels in the device.
  localparam int unsigned M_CHAINS   = 8;
  localparam int unsigned N_CHANNELS = 2;

  // Taps per tapped delay line (two taps per CARRY4).
  localparam int unsigned TAPS_PER_CHAIN = 276;
  localparam int unsigned FINE_W  = $clog2(TAPS_PER_CHAIN + 1);   // 9 bits

  // Coarse counter and fixed-point time format.
  localparam int unsigned COARSE_W = 24;
  localparam int unsigned FRAC_W   = 16;
  localparam int unsigned TIME_W   = COARSE_W + FRAC_W;   // 40 bits
  // Signed width of a difference between two chains of one hit (T_D etc.).
  localparam int unsigned DIFF_W   = FRAC_W + 4;

  // Bin used for uncalibrated conversion: one period spans about 260 taps.
  localparam int unsigned NOMINAL_TAPS_PER_PERIOD = 260;
  localparam int unsigned BIN_NOM = (1 << FRAC_W) / NOMINAL_TAPS_PER_PERIOD;

  typedef logic [FINE_W-1:0]          fine_t;
  typedef logic [COARSE_W-1:0]        coarse_t;
  typedef logic [TIME_W-1:0]          tdc_time_t;
  typedef logic signed [DIFF_W-1:0]   diff_t;

  // Raw code of one plain TDC: coarse count of the sampling edge and the
  // number of taps the hit edge had passed at that edge.
  typedef struct packed {
    coarse_t coarse;
    fine_t   fine;
  } raw_code_t;

  // Calibration sequence of a channel.
  typedef enum logic [1:0] {
    CH_UNCAL   = 2'd0,   // fine codes converted with the nominal bin
    CH_DENSITY = 2'd1,   // code-density histograms being collected
    CH_OFFSET  = 2'd2,   // chain offsets T_D(m) being averaged
    CH_READY   = 2'd3    // calibrated tables and offsets in use
  } ch_state_e;

endpackage

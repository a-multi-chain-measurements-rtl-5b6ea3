`timescale 1ps/1fs
// tdl_chain -- BEHAVIOURAL MODEL (not synthesizable) of one tapped delay line
// built from the FPGA's dedicated carry logic, together with the slice
// flip-flops that sample its taps.
//
// In the device the hit runs up a column of CARRY4 cells, each split into two
// taps, and every tap output is captured by a flip-flop on the rising clock
// edge. This model keeps the time of the last rising and falling edge of
// `hit` and, at every clock edge at time t, sets q[k] to the level `hit` had
// at t - D(k), where D(k) is the cumulative delay up to tap k. The result is
// the thermometer code a real chain would give: taps 0..n-1 high when the
// edge has travelled n taps. The tap delays are non-uniform, drawn from a
// fixed pseudo-random sequence selected by SEED, with mean TAP_PS and a
// spread of +/- SPREAD around it, so each chain has its own non-linearity,
// like chains placed in different columns. Pulses shorter than the chain
// (about one clock period) are not modelled.
//
// 276 taps, two per CARRY4, follow the presented TDC; the delay values are
// this model's own.
//
// Interface: hit (asynchronous), clk, q[N_TAPS-1:0] registered on clk.
module tdl_chain #(
  parameter int unsigned N_TAPS = 276,
  parameter real         TAP_PS = 6250.0 / 260.0,
  parameter real         SPREAD = 0.6,
  parameter int unsigned SEED   = 1
) (
  input  logic              hit,
  input  logic              clk,
  output logic [N_TAPS-1:0] q
);

  real d_cum [N_TAPS];   // delay from the chain input to tap k output, ps
  realtime t_rise;
  realtime t_fall;

  initial begin
    int unsigned s;
    real acc;
    s   = SEED * 32'h9E37_79B9 + 32'h7F4A_7C15;
    acc = 0.0;
    for (int k = 0; k < N_TAPS; k++) begin
      s = s * 32'd1664525 + 32'd1013904223;
      // uniform in [1-SPREAD, 1+SPREAD) times the mean tap delay
      acc += TAP_PS * (1.0 - SPREAD + 2.0 * SPREAD * real'(s >> 8) / 16777216.0);
      d_cum[k] = acc;
    end
    t_rise = -2.0e9;   // hit low since long before time 0
    t_fall = -1.0e9;
    q = '0;
  end

  always @(posedge hit) t_rise = $realtime;
  always @(negedge hit) t_fall = $realtime;

  always @(posedge clk) begin
    realtime now;
    now = $realtime;
    for (int k = 0; k < N_TAPS; k++) begin
      realtime tau;
      tau = now - d_cum[k];
      // level of hit at time tau, from its last rising and falling edges
      q[k] <= (tau >= t_rise) && !((t_fall > t_rise) && (tau >= t_fall));
    end
  end

endmodule

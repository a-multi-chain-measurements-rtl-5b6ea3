`timescale 1ps/1fs
// averager -- forms the final TDC time of a hit from its M plain TDC times:
//     t_Final = (1/M) * sum_{i=1..M} (t_Plain(i) - T_D(i))
//
// This is the paper's averaging formula. To stay exact when the coarse
// counter wraps, it is evaluated relative to the first chain's corrected
// time r = t_Plain(1) - T_D(1):
//     t_Final = r + (1/M) * sum_i ((t_Plain(i) - T_D(i)) - r)
// which is the same number; the differences are small signed values. The
// division by M truncates toward zero, at most one time unit
// (T_clk / 2**FRAC_W, about 0.1 ps) of error. The rewriting is this
// design's choice.
//
// Timing: t_final/valid_out registered, one clock after valid_in.
module averager
  import mcatdc_pkg::*;
#(
  parameter int unsigned M = mcatdc_pkg::M_CHAINS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      valid_in,
  input  tdc_time_t t_plain [M],
  input  diff_t     td      [M],
  output logic      valid_out,
  output tdc_time_t t_final
);

  localparam int unsigned SUM_W = DIFF_W + $clog2(M) + 1;

  tdc_time_t               ref_t;
  logic signed [SUM_W-1:0] sum_d;
  logic signed [SUM_W-1:0] mean_d;

  always_comb begin
    ref_t = t_plain[0] - TIME_W'(td[0]);
    sum_d = '0;
    for (int i = 0; i < M; i++)
      sum_d = sum_d + SUM_W'(diff_t'(t_plain[i] - TIME_W'(td[i]) - ref_t));
    mean_d = sum_d / $signed(SUM_W'(M));
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      valid_out <= 1'b0;
      t_final   <= '0;
    end else begin
      valid_out <= valid_in;
      if (valid_in) t_final <= ref_t + TIME_W'(mean_d);
    end

endmodule

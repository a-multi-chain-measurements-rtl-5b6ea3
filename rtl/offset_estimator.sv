`timescale 1ps/1fs
// offset_estimator -- measures the averaging delay T_D(m) between chain m and
// chain 1 from the plain TDC times of real hits.
//
// For each of N = 2**LOG2_NOFF hits it accumulates t_Plain(m) - t_Plain(1)
// for every m; T_D(m) is the accumulated sum divided by N (an arithmetic
// shift). T_D(1) is zero by definition, as in the paper. The estimate holds
// both the delay-cell offsets and any constant offsets between the chains'
// calibration tables, which is what the averaging needs to cancel. The
// method (mean of differences) follows the paper's definition; N and the
// widths are this design's choices. Differences are taken modulo 2**TIME_W
// and read as DIFF_W-bit signed numbers, so wrap of the coarse counter is
// harmless.
//
// Sequence: start clears the sums; the next N valid vectors are accumulated;
// then td[] is updated and done rises (and stays high until the next start).
// td[] keeps its value during a new estimation.
module offset_estimator
  import mcatdc_pkg::*;
#(
  parameter int unsigned M         = mcatdc_pkg::M_CHAINS,
  parameter int unsigned LOG2_NOFF = 10
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  logic      valid,
  input  tdc_time_t t_plain [M],
  output diff_t     td      [M],
  output logic      busy,
  output logic      done
);

  localparam int unsigned ACC_W = DIFF_W + LOG2_NOFF;

  logic signed [ACC_W-1:0] acc [M];
  logic [LOG2_NOFF:0]      n_hits;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      n_hits <= '0;
      for (int m = 0; m < M; m++) begin
        acc[m] <= '0;
        td[m]  <= '0;
      end
    end else if (start) begin
      busy   <= 1'b1;
      done   <= 1'b0;
      n_hits <= '0;
      for (int m = 0; m < M; m++) acc[m] <= '0;
    end else if (busy && valid) begin
      for (int m = 0; m < M; m++)
        acc[m] <= acc[m] + ACC_W'(diff_t'(t_plain[m] - t_plain[0]));
      n_hits <= n_hits + 1'b1;
      if (n_hits == (LOG2_NOFF+1)'(2**LOG2_NOFF - 1)) begin
        busy <= 1'b0;
        done <= 1'b1;
        for (int m = 0; m < M; m++)
          td[m] <= diff_t'((acc[m] + ACC_W'(diff_t'(t_plain[m] - t_plain[0]))) >>> LOG2_NOFF);
      end
    end

endmodule

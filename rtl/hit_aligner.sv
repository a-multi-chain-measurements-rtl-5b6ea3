`timescale 1ps/1fs
// hit_aligner -- gathers the M plain TDC times of one hit into one vector.
//
// The chains see the hit at slightly different times (one delay cell apart),
// so a hit near a clock edge is reported by some chains one cycle later than
// by others. Each chain's time is held with a flag when it arrives; when all
// M flags are set (counting the ones arriving in the same cycle) the vector
// is passed on with a one-cycle valid. If the set is not complete WINDOW
// clocks after its first member, it is discarded and `drop` pulses (a chain
// missed the hit). The paper averages the M times of each hit but does not
// say how they are matched; this block is this design's choice.
//
// Timing: t_out/valid_out registered, one clock after the last member.
module hit_aligner
  import mcatdc_pkg::*;
#(
  parameter int unsigned M      = mcatdc_pkg::M_CHAINS,
  parameter int unsigned WINDOW = 3
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      valid_in [M],
  input  tdc_time_t t_in     [M],
  output logic      valid_out,
  output tdc_time_t t_out    [M],
  output logic      drop
);

  logic [M-1:0]      got, got_next;
  tdc_time_t         held [M];
  logic [$clog2(WINDOW+1)-1:0] age;

  always_comb
    for (int i = 0; i < M; i++) got_next[i] = got[i] | valid_in[i];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      got       <= '0;
      age       <= '0;
      valid_out <= 1'b0;
      drop      <= 1'b0;
      for (int i = 0; i < M; i++) begin
        held[i]  <= '0;
        t_out[i] <= '0;
      end
    end else begin
      valid_out <= 1'b0;
      drop      <= 1'b0;
      for (int i = 0; i < M; i++)
        if (valid_in[i]) held[i] <= t_in[i];
      if (&got_next) begin
        valid_out <= 1'b1;
        for (int i = 0; i < M; i++)
          t_out[i] <= valid_in[i] ? t_in[i] : held[i];
        got <= '0;
        age <= '0;
      end else if (|got_next) begin
        if (age == ($clog2(WINDOW+1))'(WINDOW)) begin
          drop <= 1'b1;
          got  <= '0;
          age  <= '0;
        end else begin
          got <= got_next;
          age <= age + 1'b1;
        end
      end
    end

endmodule

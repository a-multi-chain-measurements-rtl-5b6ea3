`timescale 1ps/1fs
// code_density_cal -- code-density (statistical) calibration of one chain:
// histograms its fine codes and writes the INL calibration table of inl_cor.
//
// Hits that are uncorrelated with the clock fall into each fine-code bin with
// a probability proportional to the bin's width, so after N = 2**LOG2_NCAL
// hits the width of bin n is count(n)/N of a clock period. The table entry of
// code n is the time to the middle of its bin,
//     table[n] = (cum(n) + count(n)/2) / N * 2**FRAC_W,  cum(n) = sum_{j<n} count(j)
// in units of T_clk / 2**FRAC_W. Because N is a power of two the division is
// a shift. The paper obtains each chain's INL by a code-density test and
// converts codes with it; the histogram size, the hit count and the
// bin-centre rule are this design's choices.
//
// Sequence: a start pulse clears the 2**FINE_W histogram bins (one per
// clock), then counts the next N codes (code_valid pulses, at most one per
// clock), then walks the bins once, writing one table entry per clock through
// lut_we/lut_addr/lut_data, and raises done until the next start. busy is
// high from start to done. One hit = one read-modify-write of a bin.
module code_density_cal
  import mcatdc_pkg::*;
#(
  parameter int unsigned LOG2_NCAL = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            code_valid,
  input  fine_t           code,
  output logic            lut_we,
  output fine_t           lut_addr,
  output logic [FRAC_W:0] lut_data,
  output logic            busy,
  output logic            done
);

  localparam int unsigned CNT_W = LOG2_NCAL + 1;
  localparam int unsigned PRD_W = CNT_W + 1 + FRAC_W;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COLLECT, S_BUILD, S_DONE} state_e;
  state_e state;

  logic [CNT_W-1:0] hist [2**FINE_W];
  logic [CNT_W-1:0] n_hits;
  logic [CNT_W-1:0] cum;
  fine_t            addr;
  logic [PRD_W-1:0] centre;

  // (2*cum + count) * 2**FRAC_W / (2*N)
  assign centre = ({(PRD_W - FRAC_W)'({cum, 1'b0}) + (PRD_W - FRAC_W)'(hist[addr]), FRAC_W'(0)})
                  >> (LOG2_NCAL + 1);

  always_ff @(posedge clk) begin
    if (state == S_CLEAR)
      hist[addr] <= '0;
    else if (state == S_COLLECT && code_valid)
      hist[code] <= hist[code] + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state    <= S_IDLE;
      addr     <= '0;
      n_hits   <= '0;
      cum      <= '0;
      lut_we   <= 1'b0;
      lut_addr <= '0;
      lut_data <= '0;
    end else begin
      lut_we <= 1'b0;
      unique case (state)
        S_IDLE, S_DONE:
          if (start) begin
            state <= S_CLEAR;
            addr  <= '0;
          end
        S_CLEAR: begin
          addr <= addr + 1'b1;
          if (addr == fine_t'(2**FINE_W - 1)) begin
            state  <= S_COLLECT;
            n_hits <= '0;
          end
        end
        S_COLLECT:
          if (code_valid) begin
            n_hits <= n_hits + 1'b1;
            if (n_hits == CNT_W'(2**LOG2_NCAL - 1)) begin
              state <= S_BUILD;
              addr  <= '0;
              cum   <= '0;
            end
          end
        S_BUILD: begin
          lut_we   <= 1'b1;
          lut_addr <= addr;
          lut_data <= (FRAC_W+1)'(centre);
          cum      <= cum + hist[addr];
          addr     <= addr + 1'b1;
          if (addr == fine_t'(2**FINE_W - 1))
            state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end

  assign busy = (state == S_CLEAR) || (state == S_COLLECT) || (state == S_BUILD) || lut_we;
  assign done = (state == S_DONE) && !lut_we;

endmodule

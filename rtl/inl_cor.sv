`timescale 1ps/1fs
// inl_cor -- INL correction of one chain: converts its raw code into a plain
// TDC time t_Plain(i).
//
// Each fine code has a calibration table entry holding the time, in units of
// T_clk / 2**FRAC_W, that the hit edge needs to reach the middle of that
// code's bin. The table is written by code_density_cal through the write
// port. The plain time is
//     t_Plain = coarse * 2**FRAC_W - table[fine]
// i.e. the sampling edge minus the edge's travel time. While use_lut is low
// (before calibration) the table is bypassed and the fine code is converted
// with the nominal bin, fine * BIN_NOM, which corresponds to the "binary
// fine codes, no calibration" case the paper compares against. The table
// format and the bypass are this design's choices.
//
// Timing: t_plain/t_valid registered, one clock after raw_valid.
module inl_cor
  import mcatdc_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        use_lut,
  // table write port
  input  logic        lut_we,
  input  fine_t       lut_addr,
  input  logic [FRAC_W:0] lut_data,
  // raw code in
  input  raw_code_t   raw,
  input  logic        raw_valid,
  // plain TDC time out
  output tdc_time_t   t_plain,
  output logic        t_valid
);

  logic [FRAC_W:0] lut [2**FINE_W];
  logic [FRAC_W:0] fine_time;

  always_ff @(posedge clk)
    if (lut_we) lut[lut_addr] <= lut_data;

  always_comb
    if (use_lut) fine_time = lut[raw.fine];
    else         fine_time = (FRAC_W+1)'(raw.fine * BIN_NOM);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      t_plain <= '0;
      t_valid <= 1'b0;
    end else begin
      t_valid <= raw_valid;
      if (raw_valid)
        t_plain <= {raw.coarse, FRAC_W'(0)} - TIME_W'(fine_time);
    end

endmodule

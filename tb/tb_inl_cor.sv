`timescale 1ps/1fs
// tb_inl_cor -- self-checking test of the per-chain INL correction.
// Fills the table with random bin-centre times, then converts random raw
// codes with the table in use and bypassed; expected times are
// coarse*2**FRAC_W - table[fine] and coarse*2**FRAC_W - fine*BIN_NOM,
// computed here from a copy of the table. Output one clock after the input.
module tb_inl_cor;
  import mcatdc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic use_lut = 0;
  logic lut_we = 0;
  fine_t lut_addr = '0;
  logic [FRAC_W:0] lut_data = '0;
  raw_code_t raw = '0;
  logic raw_valid = 0;
  tdc_time_t t_plain;
  logic t_valid;
  int checks = 0, failures = 0;
  longint unsigned table_c [2**FINE_W];

  inl_cor dut (.clk(clk), .rst_n(rst_n), .use_lut(use_lut), .lut_we(lut_we),
               .lut_addr(lut_addr), .lut_data(lut_data), .raw(raw),
               .raw_valid(raw_valid), .t_plain(t_plain), .t_valid(t_valid));

  always #3125 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 2**FINE_W; a++) begin
      @(negedge clk);
      lut_we   = 1;
      lut_addr = fine_t'(a);
      table_c[a] = $urandom_range(0, 1 << FRAC_W);
      lut_data = (FRAC_W+1)'(table_c[a]);
    end
    @(negedge clk) lut_we = 0;
    for (int t = 0; t < 400; t++) begin
      longint unsigned ft, expt;
      @(negedge clk);
      use_lut    = (t % 3 != 0);
      raw.coarse = coarse_t'($urandom);
      raw.fine   = fine_t'($urandom_range(0, TAPS_PER_CHAIN));
      raw_valid  = 1;
      ft   = use_lut ? table_c[raw.fine] : longint'(raw.fine) * BIN_NOM;
      expt = ((longint'(raw.coarse) << FRAC_W) - ft) & ((64'd1 << TIME_W) - 1);
      @(posedge clk); #1;
      checks++;
      if (!t_valid || t_plain != tdc_time_t'(expt)) begin
        failures++;
        $display("FAIL t=%0d use_lut=%0b fine=%0d got %0d exp %0d", t, use_lut, raw.fine, t_plain, expt);
      end
      @(negedge clk) raw_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (t_valid) begin failures++; $display("FAIL valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

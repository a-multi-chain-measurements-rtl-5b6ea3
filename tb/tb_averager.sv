`timescale 1ps/1fs
// tb_averager -- self-checking test of the averaging formula
// t_Final = (1/M) sum (t_Plain(i) - T_D(i)), evaluated here in 64-bit
// integers on times that do not wrap; the block's result must match to
// within one time unit, one clock after valid_in. A few vectors straddle
// the wrap of the time counter and are checked modulo 2**TIME_W.
module tb_averager;
  import mcatdc_pkg::*;
  localparam int unsigned M = 8;

  logic clk = 0, rst_n = 0, valid_in = 0;
  tdc_time_t t_plain [M];
  diff_t td [M];
  logic valid_out;
  tdc_time_t t_final;
  int checks = 0, failures = 0;

  averager #(.M(M)) dut (.clk(clk), .rst_n(rst_n), .valid_in(valid_in), .t_plain(t_plain),
                         .td(td), .valid_out(valid_out), .t_final(t_final));

  always #3125 clk = ~clk;

  initial begin
    for (int m = 0; m < M; m++) begin t_plain[m] = '0; td[m] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      longint unsigned base;
      longint sum, want, got, err;
      bit wrap;
      wrap = (t % 10 == 9);
      base = wrap ? (64'd1 << TIME_W) - 64'd2000 : (longint'($urandom) << 6) + 64'd100000;
      sum = 0;
      for (int m = 0; m < M; m++) begin
        longint tv, dv;
        dv = (m == 0) ? 0 : longint'($urandom_range(0, 4000)) - 1000;
        tv = longint'(base) + dv + longint'($urandom_range(0, 400)) - 200;
        td[m]      = diff_t'(dv);
        t_plain[m] = tdc_time_t'(tv);
        sum += tv - dv;
      end
      // floor-free mean: round toward zero of the excess over the base
      want = longint'(base) + (sum - M * longint'(base)) / M;
      @(negedge clk) valid_in = 1;
      @(posedge clk); #1;
      got = longint'(t_final);
      err = (got - want) % (64'sd1 <<< TIME_W);
      if (err > (64'sd1 <<< (TIME_W-1))) err -= (64'sd1 <<< TIME_W);
      if (err < -(64'sd1 <<< (TIME_W-1))) err += (64'sd1 <<< TIME_W);
      checks++;
      if (!valid_out || err > 1 || err < -1) begin
        failures++;
        $display("FAIL t=%0d got %0d expected %0d", t, got, want);
      end
      @(negedge clk) valid_in = 0;
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

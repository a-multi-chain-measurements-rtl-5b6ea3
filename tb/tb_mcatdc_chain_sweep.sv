`timescale 1ps/1fs
// tb_mcatdc_chain_sweep -- precision and bin size against the chain number M.
//
// Three channels built with M = 1 (a plain single-chain TDC), M = 4 and
// M = 8 receive the same hits. All are calibrated (2**12 equidistributed
// calibration hits, 2**8 offset hits), then:
//  - precision: RMS error of t_final against the true hit time over 400
//    hits at random clock phases (constant offset removed);
//  - bin size: a 48 ps sweep in 0.25 ps steps; the mean bin is 48 ps over
//    the number of output steps.
// Checks: the RMS must fall as M grows (M=8 < M=4 < M=1), and the mean bin
// must be below 8 ps for M = 8 and above 12 ps for M = 1.
module tb_mcatdc_chain_sweep;
  import mcatdc_pkg::*;
  localparam real T_PS  = 6250.0;
  localparam real TU_PS = T_PS / real'(1 << FRAC_W);
  localparam real PHI   = 0.6180339887498949;
  localparam int  NCFG  = 3;
  localparam int  MS [NCFG] = '{1, 4, 8};

  logic clk = 0, rst_n = 0, hit = 0, cal_start = 0;
  coarse_t coarse;
  ch_state_e state [NCFG];
  tdc_time_t t_final [NCFG];
  logic t_valid [NCFG], drop [NCFG];
  tdc_time_t last_t [NCFG];
  int checks = 0, failures = 0;

  coarse_counter #(.W(COARSE_W)) u_cnt (.clk(clk), .rst_n(rst_n), .en(1'b1), .count(coarse));

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    mcatdc_channel #(.M(MS[g]), .LOG2_NCAL(12), .LOG2_NOFF(8), .SEED_BASE(7)) u_ch (
      .clk(clk), .rst_n(rst_n), .hit_in(hit), .coarse(coarse), .cal_start(cal_start),
      .state(state[g]), .t_final(t_final[g]), .t_valid(t_valid[g]), .drop(drop[g]));
    always @(posedge clk) if (rst_n && t_valid[g]) last_t[g] = t_final[g];
  end

  always #3125 clk = ~clk;

  realtime t_hit;
  task automatic send_hit(real phase);
    @(posedge clk);
    #(phase);
    hit = 1;
    t_hit = $realtime;
    #(8000.0);
    hit = 0;
    repeat (3) @(posedge clk);
  endtask

  function automatic bit all_ready();
    for (int g = 0; g < NCFG; g++) if (state[g] != CH_READY) return 0;
    return 1;
  endfunction

  initial begin
    real sum [NCFG], sum2 [NCFG], rms [NCFG], bin [NCFG];
    longint prev [NCFG];
    int steps [NCFG];
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk) cal_start = 1;
    @(negedge clk) cal_start = 0;
    for (int h = 0; h < 20000 && !all_ready(); h++)
      send_hit((real'(h) * PHI - $floor(real'(h) * PHI)) * T_PS);
    checks++;
    if (!all_ready()) begin failures++; $display("FAIL calibration did not finish"); end

    for (int g = 0; g < NCFG; g++) begin sum[g] = 0; sum2[g] = 0; end
    for (int h = 0; h < 400; h++) begin
      send_hit(real'($urandom_range(0, 6249)) + real'($urandom_range(0, 999)) / 1000.0);
      repeat (6) @(posedge clk);
      for (int g = 0; g < NCFG; g++) begin
        real e;
        e = real'(last_t[g]) * TU_PS - t_hit;
        sum[g] += e; sum2[g] += e * e;
      end
    end
    for (int g = 0; g < NCFG; g++)
      rms[g] = $sqrt(sum2[g] / 400 - (sum[g] / 400) * (sum[g] / 400));

    for (int g = 0; g < NCFG; g++) begin steps[g] = 0; prev[g] = -1; end
    for (int s = 0; s <= 192; s++) begin
      send_hit(2500.0 + 0.25 * s);
      repeat (6) @(posedge clk);
      for (int g = 0; g < NCFG; g++) begin
        if (s > 0 && longint'(last_t[g][FRAC_W-1:0]) != prev[g]) steps[g]++;
        prev[g] = longint'(last_t[g][FRAC_W-1:0]);
      end
    end
    for (int g = 0; g < NCFG; g++) begin
      bin[g] = 48.0 / ((steps[g] > 0) ? steps[g] : 1);
      $display("M=%0d: rms %0.2f ps, mean bin %0.2f ps (%0d steps in 48 ps)", MS[g], rms[g], bin[g], steps[g]);
    end
    checks++;
    if (!(rms[2] < rms[1] && rms[1] < rms[0])) begin failures++; $display("FAIL rms does not fall with M"); end
    checks++;
    if (bin[2] > 8.0) begin failures++; $display("FAIL M=8 bin too large"); end
    checks++;
    if (bin[0] < 12.0) begin failures++; $display("FAIL M=1 bin too small"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

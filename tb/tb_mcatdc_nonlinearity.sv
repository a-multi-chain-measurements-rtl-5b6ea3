`timescale 1ps/1fs
// tb_mcatdc_nonlinearity -- code-density DNL/INL of the averaged output at a
// coarse LSB, multi-chain (M = 8) against a single chain (M = 1).
//
// Both channels are calibrated (2**12 calibration hits, 2**8 offset hits),
// then measure 2**14 hits whose clock phases are equidistributed (a Weyl
// sequence started away from the calibration one). Each time stamp's
// position within the clock period is re-quantised to an LSB of T/260
// (24.04 ps), giving 260 output codes; with equidistributed hits an ideal TDC
// fills them equally. DNL(k) = count(k)/mean - 1, INL(k) = running sum of
// DNL. Checks: the DNL and INL ranges of M = 8 must be smaller than those of
// M = 1, and the M = 8 DNL and INL must lie within the ranges published for
// the hardware at this LSB, (-0.7, 0.8) and (-1, 0.7) LSB.
module tb_mcatdc_nonlinearity;
  import mcatdc_pkg::*;
  localparam real T_PS = 6250.0;
  localparam real PHI  = 0.6180339887498949;
  localparam int  NB   = 260;
  localparam int  NHIT = 1 << 14;
  localparam int  MS [2] = '{1, 8};

  logic clk = 0, rst_n = 0, hit = 0, cal_start = 0;
  coarse_t coarse;
  ch_state_e state [2];
  tdc_time_t t_final [2];
  logic t_valid [2], drop [2];
  int hist [2][NB];
  bit measuring = 0;
  int checks = 0, failures = 0;

  coarse_counter #(.W(COARSE_W)) u_cnt (.clk(clk), .rst_n(rst_n), .en(1'b1), .count(coarse));

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    mcatdc_channel #(.M(MS[g]), .LOG2_NCAL(12), .LOG2_NOFF(8), .SEED_BASE(11)) u_ch (
      .clk(clk), .rst_n(rst_n), .hit_in(hit), .coarse(coarse), .cal_start(cal_start),
      .state(state[g]), .t_final(t_final[g]), .t_valid(t_valid[g]), .drop(drop[g]));
    always @(posedge clk)
      if (rst_n && measuring && t_valid[g])
        hist[g][(int'(t_final[g][FRAC_W-1:0]) * NB) >> FRAC_W]++;
  end

  always #3125 clk = ~clk;

  task automatic send_hit(real phase);
    @(posedge clk);
    #(phase);
    hit = 1;
    #(8000.0);
    hit = 0;
    repeat (3) @(posedge clk);
  endtask

  function automatic real weyl(int h);
    return (real'(h) * PHI - $floor(real'(h) * PHI)) * T_PS;
  endfunction

  initial begin
    real dnl_lo [2], dnl_hi [2], inl_lo [2], inl_hi [2];
    int total [2];
    for (int g = 0; g < 2; g++) for (int k = 0; k < NB; k++) hist[g][k] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk) cal_start = 1;
    @(negedge clk) cal_start = 0;
    for (int h = 0; h < 20000 && !(state[0] == CH_READY && state[1] == CH_READY); h++)
      send_hit(weyl(h));
    repeat (8) @(posedge clk);
    checks++;
    if (state[0] != CH_READY || state[1] != CH_READY) begin failures++; $display("FAIL not calibrated"); end

    measuring = 1;
    for (int h = 0; h < NHIT; h++) send_hit(weyl(500000 + h));
    repeat (8) @(posedge clk);
    measuring = 0;

    for (int g = 0; g < 2; g++) begin
      real mean, inl;
      total[g] = 0;
      for (int k = 0; k < NB; k++) total[g] += hist[g][k];
      mean = real'(total[g]) / NB;
      dnl_lo[g] = 1e9; dnl_hi[g] = -1e9; inl_lo[g] = 1e9; inl_hi[g] = -1e9; inl = 0;
      for (int k = 0; k < NB; k++) begin
        real d;
        d = real'(hist[g][k]) / mean - 1.0;
        inl += d;
        if (d < dnl_lo[g]) dnl_lo[g] = d;
        if (d > dnl_hi[g]) dnl_hi[g] = d;
        if (inl < inl_lo[g]) inl_lo[g] = inl;
        if (inl > inl_hi[g]) inl_hi[g] = inl;
      end
      $display("M=%0d: %0d hits, DNL (%0.2f, %0.2f) LSB, INL (%0.2f, %0.2f) LSB at 24.04 ps",
               MS[g], total[g], dnl_lo[g], dnl_hi[g], inl_lo[g], inl_hi[g]);
      checks++;
      if (total[g] != NHIT) begin failures++; $display("FAIL M=%0d counted %0d hits", MS[g], total[g]); end
    end
    checks++;
    if ((dnl_hi[1] - dnl_lo[1]) >= (dnl_hi[0] - dnl_lo[0])) begin failures++; $display("FAIL DNL range not reduced"); end
    checks++;
    if ((inl_hi[1] - inl_lo[1]) >= (inl_hi[0] - inl_lo[0])) begin failures++; $display("FAIL INL range not reduced"); end
    checks++;
    if (dnl_hi[1] > 0.8 || dnl_lo[1] < -0.7 || inl_hi[1] > 0.7 || inl_lo[1] < -1.0) begin
      failures++;
      $display("FAIL M=8 non-linearity beyond the published (-0.7, 0.8) / (-1, 0.7) LSB");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps/1fs
// tb_mcatdc_top -- end-to-end test of the two-channel TDC at its default
// size (2 channels x 8 chains x 276 taps, 2**16 calibration hits per chain,
// 2**10 offset hits), in the way such a TDC is characterised on the bench:
// a "cable delay" test, where one hit reaches channel 0 and, a fixed delay D
// later, channel 1, and the spread of t1 - t0 gives the precision.
//
// 1. Uncalibrated cable test (nominal bin conversion).
// 2. cal_start; both channels see 2**16 + 2**10 hits with equidistributed
//    clock phases; both must reach CH_READY.
// 3. Calibrated cable test at D = 1000.0 ps and D = 1037.3 ps, hits at
//    random phases: the single-channel RMS, (std of t1 - t0) / sqrt(2),
//    must be below 6 ps and below the uncalibrated one; the difference of the
//    two mean intervals must be 37.3 ps within 2 ps.
// 4. One chain of channel 0 is made to miss a hit: channel 0 must drop it
//    and channel 1 must still report it.
// Mechanisms counted: uncalibrated outputs, density phase, offset phase,
// calibrated outputs, hits split across two clock edges, dropped hits.
module tb_mcatdc_top;
  import mcatdc_pkg::*;
  localparam real T_PS  = 6250.0;
  localparam real TU_PS = T_PS / real'(1 << FRAC_W);
  localparam real PHI   = 0.6180339887498949;

  logic clk = 0, rst_n = 0, cal_start = 0;
  logic hit_in [2];
  ch_state_e state [2];
  tdc_time_t t_final [2];
  logic t_valid [2];
  logic drop [2];
  int checks = 0, failures = 0;

  int n_uncal = 0, n_cal = 0, n_split = 0, n_drop = 0;
  bit seen_density = 0, seen_offset = 0;
  tdc_time_t last_t [2];
  int n_valid [2];

  mcatdc_top dut (.clk(clk), .rst_n(rst_n), .hit_in(hit_in), .cal_start(cal_start),
                  .state(state), .t_final(t_final), .t_valid(t_valid), .drop(drop));

  always #3125 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) begin
      if (t_valid[c]) begin
        last_t[c] = t_final[c];
        n_valid[c]++;
        if (state[c] == CH_UNCAL) n_uncal++;
        if (state[c] == CH_READY) n_cal++;
      end
      if (drop[c]) n_drop++;
    end
    if (dut.g_ch[0].u_ch.u_core.raw_valid[0] != dut.g_ch[0].u_ch.u_core.raw_valid[7]) n_split++;
    if (state[0] == CH_DENSITY && state[1] == CH_DENSITY) seen_density = 1;
    if (state[0] == CH_OFFSET || state[1] == CH_OFFSET)   seen_offset  = 1;
  end

  // hit at `phase` after the next edge on channel 0, `dly` ps later on channel 1
  task automatic send_pair(real phase, real dly);
    @(posedge clk);
    #(phase);
    hit_in[0] = 1;
    #(dly);
    hit_in[1] = 1;
    #(8000.0 - dly);
    hit_in[0] = 0;
    #(dly);
    hit_in[1] = 0;
    repeat (3) @(posedge clk);
  endtask

  // one cable test: returns mean and single-channel RMS of t1 - t0, in ps
  task automatic cable_test(real dly, int n, output real mean, output real rms);
    real sum, sum2, d;
    int v0, v1;
    sum = 0; sum2 = 0;
    for (int h = 0; h < n; h++) begin
      v0 = n_valid[0]; v1 = n_valid[1];
      send_pair(real'($urandom_range(0, 6249)) + real'($urandom_range(0, 999)) / 1000.0, dly);
      repeat (6) @(posedge clk);
      checks++;
      if (n_valid[0] != v0 + 1 || n_valid[1] != v1 + 1) begin
        failures++;
        $display("FAIL hit %0d: outputs %0d/%0d", h, n_valid[0] - v0, n_valid[1] - v1);
      end
      d = real'(longint'(last_t[1] - last_t[0])) * TU_PS;
      sum += d; sum2 += d * d;
    end
    mean = sum / n;
    rms  = $sqrt(sum2 / n - mean * mean) / $sqrt(2.0);
  endtask

  initial begin
    real m_u, r_u, m1, r1, m2, r2;
    hit_in[0] = 0; hit_in[1] = 0;
    n_valid[0] = 0; n_valid[1] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (3) @(posedge clk);

    // 1. uncalibrated
    cable_test(1000.0, 200, m_u, r_u);
    $display("uncalibrated: mean %0.2f ps, rms %0.2f ps", m_u, r_u);

    // 2. calibration
    @(negedge clk) cal_start = 1;
    @(negedge clk) cal_start = 0;
    for (int h = 0; h < 200000 && !(state[0] == CH_READY && state[1] == CH_READY); h++) begin
      real ph;
      ph = (real'(h) * PHI - $floor(real'(h) * PHI)) * T_PS;
      send_pair(ph, 0.0);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (state[0] != CH_READY || state[1] != CH_READY || !seen_density || !seen_offset) begin
      failures++;
      $display("FAIL calibration: state %0d %0d", state[0], state[1]);
    end

    // 3. calibrated cable tests
    cable_test(1000.0, 400, m1, r1);
    cable_test(1037.3, 400, m2, r2);
    $display("calibrated: D=1000.0 mean %0.2f rms %0.2f ps; D=1037.3 mean %0.2f rms %0.2f ps",
             m1, r1, m2, r2);
    checks++;
    if (r1 > 6.0 || r2 > 6.0 || r1 > r_u) begin failures++; $display("FAIL precision"); end
    checks++;
    if ((m2 - m1) < 35.3 || (m2 - m1) > 39.3) begin
      failures++;
      $display("FAIL interval difference %0.2f ps, expected 37.3", m2 - m1);
    end

    // 4. a chain of channel 0 misses a hit
    begin
      int v0, v1, d0;
      v0 = n_valid[0]; v1 = n_valid[1]; d0 = n_drop;
      force dut.g_ch[0].u_ch.g_chain[3].u_tdl.q = '0;
      send_pair(1500.0, 1000.0);
      repeat (6) @(posedge clk);
      release dut.g_ch[0].u_ch.g_chain[3].u_tdl.q;
      checks++;
      if (n_valid[0] != v0 || n_valid[1] != v1 + 1 || n_drop != d0 + 1) begin
        failures++;
        $display("FAIL drop handling");
      end
    end

    $display("mechanisms: uncalibrated=%0d density=%0b offset=%0b calibrated=%0d split=%0d drop=%0d",
             n_uncal, seen_density, seen_offset, n_cal, n_split, n_drop);
    checks++;
    if (n_uncal == 0 || !seen_density || !seen_offset || n_cal == 0 || n_split == 0 || n_drop == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

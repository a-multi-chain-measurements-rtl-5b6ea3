`timescale 1ps/1fs
// tb_mcatdc_channel -- end-to-end test of one multi-chain averaging channel
// (M = 8 chains of 276 taps, non-uniform behavioural delay lines).
//
// 1. Uncalibrated: hits are converted with the nominal bin; the error
//    against the true hit time must stay within +/- 100 ps of its mean.
// 2. cal_start: 2**LOG2_NCAL hits whose clock phases follow a Weyl sequence
//    (equidistributed, uncorrelated with the clock) feed the code-density
//    calibration, then 2**LOG2_NOFF hits the offset estimation. The state
//    must pass CH_DENSITY, CH_OFFSET, CH_READY.
// 3. Calibrated: hits at random phases; the RMS error of t_final against
//    the true time (after removing the constant mean) must be below 6 ps,
//    and at most 0.6 times the RMS error of chain 1 alone.
// 4. Resolution: a 48 ps sweep in 0.5 ps steps must give at least 10
//    distinct output codes (one chain alone steps every ~24 ps).
// 5. A hit that one chain misses (its taps forced low) must give `drop`
//    and no t_valid.
// Hits split across two clock edges by the delay cells are counted.
module tb_mcatdc_channel;
  import mcatdc_pkg::*;
  localparam int unsigned M = 8;
  localparam int unsigned K = 12;
  localparam int unsigned J = 8;
  localparam real T_PS = 6250.0;
  localparam real TU_PS = T_PS / real'(1 << FRAC_W);
  localparam real PHI = 0.6180339887498949;

  logic clk = 0, rst_n = 0, hit = 0, cal_start = 0;
  coarse_t coarse;
  ch_state_e state;
  tdc_time_t t_final;
  logic t_valid, drop;
  int checks = 0, failures = 0;

  realtime t_true_q [$];
  real     err_last;
  int      n_out = 0, n_drop = 0, n_split = 0;
  bit      seen_density = 0, seen_offset = 0;
  real     chain1_err_last;
  tdc_time_t last_final;

  coarse_counter #(.W(COARSE_W)) u_cnt (.clk(clk), .rst_n(rst_n), .en(1'b1), .count(coarse));

  mcatdc_channel #(.M(M), .LOG2_NCAL(K), .LOG2_NOFF(J)) dut (
    .clk(clk), .rst_n(rst_n), .hit_in(hit), .coarse(coarse), .cal_start(cal_start),
    .state(state), .t_final(t_final), .t_valid(t_valid), .drop(drop));

  always #3125 clk = ~clk;

  // time of the clock edge that a coarse count belongs to: count c is
  // produced by the edge at 3125 + 6250*(c-1) + the reset release offset
  realtime edge0;

  always @(posedge clk) if (rst_n) begin
    if (t_valid) begin
      realtime tt;
      n_out++;
      tt = t_true_q.pop_front();
      err_last   = real'(t_final) * TU_PS - (tt - edge0);
      chain1_err_last = real'(dut.u_core.al_t[0]) * TU_PS - (tt - edge0);
      last_final = t_final;
    end
    if (drop) n_drop++;
    if (dut.u_core.raw_valid[0] != dut.u_core.raw_valid[M-1]) n_split++;
    if (state == CH_DENSITY) seen_density = 1;
    if (state == CH_OFFSET)  seen_offset  = 1;
  end

  // one hit at `phase` ps after the next rising edge; wide pulse, then rest
  task automatic send_hit(real phase, bit record = 1);
    @(posedge clk);
    #(phase);
    hit = 1;
    if (record) t_true_q.push_back($realtime);
    #(8000.0);
    hit = 0;
    repeat (3) @(posedge clk);
  endtask

  task automatic wait_outputs();
    repeat (8) @(posedge clk);
  endtask

  initial begin
    real sum, sum2, mean, rms, c_sum, c_sum2, c1_rms, mx;
    real errs [$];
    int  n, distinct;
    longint base;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    edge0 = $realtime - 1 + 3125.0 - 6250.0;   // edge producing count 1 minus one period

    // 1. uncalibrated
    for (int h = 0; h < 40; h++) begin
      send_hit(real'($urandom_range(0, 6249)) + 0.37 * (h % 3));
      wait_outputs();
      errs.push_back(err_last);
    end
    sum = 0; foreach (errs[i]) sum += errs[i];
    mean = sum / errs.size();
    mx = 0; foreach (errs[i]) if ((errs[i] - mean) > mx || (mean - errs[i]) > mx) mx = (errs[i] > mean) ? errs[i] - mean : mean - errs[i];
    checks++;
    if (state != CH_UNCAL || n_out != 40 || mx > 100.0) begin
      failures++;
      $display("FAIL uncalibrated: state=%0d outputs=%0d max dev=%0.1f ps", state, n_out, mx);
    end
    $display("uncalibrated: max deviation %0.1f ps", mx);

    // 2. calibration
    @(negedge clk) cal_start = 1;
    @(negedge clk) cal_start = 0;
    for (int h = 0; h < (1 << K) + 4; h++) begin
      real ph;
      ph = (real'(h) * PHI - $floor(real'(h) * PHI)) * T_PS;
      send_hit(ph, 0);
      if (state == CH_OFFSET) break;
    end
    t_true_q.delete();
    while (state != CH_READY) begin
      send_hit(real'($urandom_range(0, 6249)) + 0.5, 0);
    end
    wait_outputs();
    t_true_q.delete();
    checks++;
    if (!seen_density || !seen_offset || state != CH_READY) begin
      failures++;
      $display("FAIL calibration sequence density=%0b offset=%0b state=%0d", seen_density, seen_offset, state);
    end

    // 3. calibrated precision
    errs.delete();
    sum = 0; sum2 = 0; c_sum = 0; c_sum2 = 0; n = 0;
    for (int h = 0; h < 300; h++) begin
      send_hit(real'($urandom_range(0, 6249)) + real'($urandom_range(0, 999)) / 1000.0);
      wait_outputs();
      sum += err_last; sum2 += err_last * err_last;
      c_sum += chain1_err_last; c_sum2 += chain1_err_last * chain1_err_last;
      n++;
    end
    mean   = sum / n;
    rms    = $sqrt(sum2 / n - mean * mean);
    c1_rms = $sqrt(c_sum2 / n - (c_sum / n) * (c_sum / n));
    $display("calibrated: rms %0.2f ps (chain 1 alone %0.2f ps)", rms, c1_rms);
    checks++;
    if (rms > 6.0) begin failures++; $display("FAIL rms %0.2f ps", rms); end
    checks++;
    if (rms > 0.6 * c1_rms) begin failures++; $display("FAIL no gain over one chain"); end

    // 4. resolution sweep
    distinct = 0;
    base = -1;
    for (int s = 0; s < 96; s++) begin
      longint rel;
      send_hit(3000.0 + 0.5 * s);
      wait_outputs();
      // time relative to the clock edge before the hit
      rel = longint'(last_final[FRAC_W-1:0]);
      if (rel != base) distinct++;
      base = rel;
    end
    $display("sweep: %0d distinct codes over 48 ps", distinct);
    checks++;
    if (distinct < 10) begin failures++; $display("FAIL resolution: %0d codes", distinct); end

    // 5. a chain misses the hit
    begin
      int before_out;
      before_out = n_out;
      force dut.g_chain[M-1].u_tdl.q = '0;
      send_hit(2000.0, 0);
      wait_outputs();
      release dut.g_chain[M-1].u_tdl.q;
      checks++;
      if (n_drop != 1 || n_out != before_out) begin
        failures++;
        $display("FAIL drop: drops=%0d outputs=%0d", n_drop, n_out - before_out);
      end
      repeat (4) @(posedge clk);
      send_hit(1234.5);
      wait_outputs();
      checks++;
      if (n_out != before_out + 1 || (err_last - mean) > 20.0 || (mean - err_last) > 20.0) begin
        failures++;
        $display("FAIL recovery after drop err=%0.1f", err_last - mean);
      end
    end

    $display("mechanisms: uncalibrated=40 density=%0b offset=%0b split=%0d drop=%0d",
             seen_density, seen_offset, n_split, n_drop);
    checks++;
    if (n_split == 0) begin failures++; $display("FAIL no split hit seen"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps/1fs
// tb_offset_estimator -- self-checking test of the chain-offset estimation.
// Builds vectors t(m) = base + offset(m) + noise(m), with base close to the
// wrap of the time counter, accumulates the differences to chain 1 here in
// 64-bit integers and compares td(m) with floor(sum / N). td(1) must be 0
// and td must stay unchanged until the N-th vector.
module tb_offset_estimator;
  import mcatdc_pkg::*;
  localparam int unsigned M = 8;
  localparam int unsigned J = 6;
  localparam int unsigned N = 1 << J;

  logic clk = 0, rst_n = 0, start = 0, valid = 0;
  tdc_time_t t_plain [M];
  diff_t td [M];
  logic busy, done;
  int checks = 0, failures = 0;

  offset_estimator #(.M(M), .LOG2_NOFF(J)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .valid(valid), .t_plain(t_plain),
    .td(td), .busy(busy), .done(done));

  always #3125 clk = ~clk;

  task automatic run(int scale);
    longint sum [M];
    for (int m = 0; m < M; m++) sum[m] = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    for (int h = 0; h < N; h++) begin
      longint unsigned base;
      base = (64'd1 << TIME_W) - 64'd5000 + longint'($urandom_range(0, 10000));
      for (int m = 0; m < M; m++) begin
        longint d;
        d = longint'(m) * scale + longint'($urandom_range(0, 600)) - 300;
        t_plain[m] = tdc_time_t'(base + d);
      end
      for (int m = 0; m < M; m++) begin
        longint d;
        d = longint'(t_plain[m]) - longint'(t_plain[0]);
        if (d >  (64'sd1 <<< (TIME_W-1))) d -= (64'sd1 <<< TIME_W);
        if (d < -(64'sd1 <<< (TIME_W-1))) d += (64'sd1 <<< TIME_W);
        sum[m] += d;
      end
      valid = 1;
      @(negedge clk) valid = 0;
      if (h < N - 1) begin
        checks++;
        if (done) begin failures++; $display("FAIL done early"); end
      end
    end
    @(negedge clk);
    checks++;
    if (!done) begin failures++; $display("FAIL not done"); end
    for (int m = 0; m < M; m++) begin
      longint want;
      want = sum[m] >>> J;
      checks++;
      if (longint'(td[m]) != want) begin
        failures++;
        $display("FAIL td[%0d]=%0d expected %0d", m, td[m], want);
      end
    end
  endtask

  initial begin
    for (int m = 0; m < M; m++) t_plain[m] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(283);
    run(-150);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

`timescale 1ps/1fs
// tb_tdl_chain -- self-checking test of the tapped delay line model.
// With a uniform chain (SPREAD = 0) the number of high taps must be
// floor(elapsed / TAP_PS); with the default non-uniform chain the code must
// be a clean thermometer, grow monotonically with the elapsed time and stay
// within the bounds the spread allows. A falling hit must clear the chain.
module tb_tdl_chain;
  localparam int unsigned N = 276;
  localparam real TAP = 6250.0 / 260.0;
  localparam real T   = 6250.0;

  logic clk = 0;
  logic hit_u = 0, hit_n = 0;
  logic [N-1:0] q_u, q_n;
  int checks = 0, failures = 0;

  tdl_chain #(.N_TAPS(N), .TAP_PS(TAP), .SPREAD(0.0), .SEED(3)) dut_u (.hit(hit_u), .clk(clk), .q(q_u));
  tdl_chain #(.N_TAPS(N), .TAP_PS(TAP), .SEED(5))               dut_n (.hit(hit_n), .clk(clk), .q(q_n));

  always #3125 clk = ~clk;

  function automatic int ones(logic [N-1:0] v);
    int c = 0;
    for (int k = 0; k < N; k++) if (v[k]) c++;
    return c;
  endfunction

  function automatic bit is_therm(logic [N-1:0] v);
    int n = ones(v);
    for (int k = 0; k < N; k++) if (v[k] != (k < n)) return 0;
    return 1;
  endfunction

  initial begin
    int prev_n;
    prev_n = -1;
    repeat (2) @(posedge clk);
    for (int s = 0; s < 60; s++) begin
      real elapsed, exp_lo, exp_hi;
      int n_u, n_n;
      // hit arrives `elapsed` ps before the sampling edge at 6250*k
      elapsed = 100.0 + s * 100.3;
      @(posedge clk);
      #(T - elapsed);
      hit_u = 1; hit_n = 1;
      @(posedge clk); #1;
      n_u = ones(q_u);
      n_n = ones(q_n);
      checks++;
      if (n_u != int'($floor(elapsed / TAP))) begin
        failures++;
        $display("FAIL uniform elapsed=%0.1f n=%0d exp=%0d", elapsed, n_u, int'($floor(elapsed / TAP)));
      end
      checks++;
      if (!is_therm(q_n)) begin
        failures++;
        $display("FAIL not a thermometer code");
      end
      exp_lo = $floor(elapsed / (TAP * 1.6)) - 1;
      exp_hi = $ceil(elapsed / (TAP * 0.4));
      checks++;
      if (n_n < exp_lo || n_n > exp_hi || n_n < prev_n) begin
        failures++;
        $display("FAIL non-uniform elapsed=%0.1f n=%0d prev=%0d", elapsed, n_n, prev_n);
      end
      prev_n = n_n;
      repeat (2) @(posedge clk);
      hit_u = 0; hit_n = 0;
      repeat (3) @(posedge clk);
      #1;
      checks++;
      if (q_u != '0 || q_n != '0) begin
        failures++;
        $display("FAIL chain not cleared");
      end
    end
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

`timescale 1ps/1fs
// tb_code_density_cal -- self-checking test of the code-density calibration.
// Feeds 2**LOG2_NCAL codes drawn from a known, non-uniform set of bins (in
// random order, with idle cycles between), then checks every table entry the
// block writes against (cum(n) + count(n)/2) / N * 2**FRAC_W computed here in
// floating point, and checks that a second start runs again. The build pass
// must take one clock per table entry.
module tb_code_density_cal;
  import mcatdc_pkg::*;
  localparam int unsigned K = 10;
  localparam int unsigned N = 1 << K;

  logic clk = 0, rst_n = 0, start = 0, code_valid = 0;
  fine_t code = '0;
  logic lut_we;
  fine_t lut_addr;
  logic [FRAC_W:0] lut_data;
  logic busy, done;
  int checks = 0, failures = 0;
  int counts [2**FINE_W];
  int n_written;
  int first_we_cycle, last_we_cycle, cycle;

  code_density_cal #(.LOG2_NCAL(K)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .code_valid(code_valid), .code(code),
    .lut_we(lut_we), .lut_addr(lut_addr), .lut_data(lut_data), .busy(busy), .done(done));

  always #3125 clk = ~clk;
  always @(posedge clk) cycle++;

  // expected entries, compared as they are written
  always @(posedge clk) if (rst_n && lut_we) begin
    real cum, want;
    cum = 0.0;
    for (int j = 0; j < int'(lut_addr); j++) cum += counts[j];
    want = (cum + counts[lut_addr] / 2.0) / N * (1 << FRAC_W);
    checks++;
    if (real'(lut_data) > want + 0.01 || real'(lut_data) < want - 1.01) begin
      failures++;
      $display("FAIL entry %0d = %0d expected %0.2f", lut_addr, lut_data, want);
    end
    if (n_written == 0) first_we_cycle = cycle;
    last_we_cycle = cycle;
    n_written++;
  end

  task automatic run_calibration(int shape);
    for (int a = 0; a < 2**FINE_W; a++) counts[a] = 0;
    n_written = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (busy);
    repeat (2**FINE_W + 2) @(negedge clk);
    for (int h = 0; h < N; h++) begin
      int c;
      // bins 5..264, widths varying with the code
      if (shape == 0) c = 5 + ($urandom % 260);
      else            c = ($urandom % 4 == 0) ? 10 + ($urandom % 20) : 30 + ($urandom % 230);
      @(negedge clk);
      code = fine_t'(c); code_valid = 1;
      counts[c]++;
      @(negedge clk) code_valid = 0;
      if ($urandom % 2 == 0) @(negedge clk);
    end
    wait (done);
    @(negedge clk);
    checks++;
    if (n_written != 2**FINE_W || last_we_cycle - first_we_cycle != 2**FINE_W - 1) begin
      failures++;
      $display("FAIL wrote %0d entries over %0d cycles", n_written, last_we_cycle - first_we_cycle + 1);
    end
    // codes after the N-th are ignored
    code_valid = 1; code = 7;
    @(negedge clk) code_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (!done || busy) begin failures++; $display("FAIL not done after extra code"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_calibration(0);
    run_calibration(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

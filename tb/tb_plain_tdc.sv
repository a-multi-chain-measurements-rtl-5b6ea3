`timescale 1ps/1fs
// tb_plain_tdc -- self-checking test of hit detection and raw code forming.
// Thermometer codes are driven as if captured by the tap flip-flops; the
// raw code must carry the coarse count of the sampling edge and the number
// of high taps, and valid must pulse exactly once, one clock after the
// sampling edge, for each 0 -> 1 of tap 0.
module tb_plain_tdc;
  import mcatdc_pkg::*;
  localparam int unsigned N = mcatdc_pkg::TAPS_PER_CHAIN;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] taps = '0;
  coarse_t coarse = '0;
  raw_code_t raw;
  logic valid;
  int checks = 0, failures = 0;
  int n_valid = 0;

  plain_tdc dut (.clk(clk), .rst_n(rst_n), .taps(taps), .coarse(coarse), .raw(raw), .valid(valid));

  always #3125 clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1'b1;
  always @(posedge clk) if (valid) n_valid++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int h = 0; h < 200; h++) begin
      int n, width, valid_before;
      coarse_t c_sample;
      n = $urandom_range(1, N);
      width = $urandom_range(1, 4);
      // taps as captured by the slice flip-flops at the last edge
      @(negedge clk);
      for (int k = 0; k < N; k++) taps[k] = (k < n);
      valid_before = n_valid;
      #1;
      checks++;
      if (valid) begin failures++; $display("FAIL valid too early"); end
      @(posedge clk);          // next edge: detection registers the code
      c_sample = coarse;       // count of the sampling edge, before this edge's update
      #1;
      checks++;
      if (!valid || raw.fine != fine_t'(n) || raw.coarse != c_sample) begin
        failures++;
        $display("FAIL hit %0d: valid=%0b fine=%0d exp %0d coarse=%0d exp %0d",
                 h, valid, raw.fine, n, raw.coarse, c_sample);
      end
      // hit stays high (all taps high) for a while: no new valid
      for (int w = 0; w < width; w++) begin
        @(negedge clk); taps = '1;
      end
      @(negedge clk); taps = '0;
      repeat (2) @(posedge clk);
      #1;
      checks++;
      if (n_valid != valid_before + 1) begin
        failures++;
        $display("FAIL hit %0d produced %0d valids", h, n_valid - valid_before);
      end
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

`timescale 1ps/1fs
// tb_therm_encoder -- self-checking test of the fine-code encoder.
// Drives clean thermometer codes of every length 0..N_TAPS and random codes
// with bubbles near the edge; the expected code is counted here bit by bit.
module tb_therm_encoder;
  localparam int unsigned N = 276;
  localparam int unsigned W = $clog2(N + 1);

  logic [N-1:0] therm;
  logic [W-1:0] fine;
  int checks = 0, failures = 0;

  therm_encoder #(.N_TAPS(N), .FINE_W(W)) dut (.therm(therm), .fine(fine));

  function automatic int ones(logic [N-1:0] v);
    int c = 0;
    for (int k = 0; k < N; k++) if (v[k]) c++;
    return c;
  endfunction

  initial begin
    for (int n = 0; n <= N; n++) begin
      for (int k = 0; k < N; k++) therm[k] = (k < n);
      #1;
      checks++;
      if (int'(fine) != n) begin
        failures++;
        $display("FAIL clean n=%0d fine=%0d", n, fine);
      end
    end
    for (int t = 0; t < 500; t++) begin
      int n = $urandom_range(3, N - 3);
      for (int k = 0; k < N; k++) therm[k] = (k < n);
      // bubbles: flip one or two taps next to the edge
      therm[n + 1] = 1'b1;
      if (t % 2 == 0) therm[n - 2] = 1'b0;
      #1;
      checks++;
      if (int'(fine) != ones(therm)) begin
        failures++;
        $display("FAIL bubble n=%0d fine=%0d", n, fine);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

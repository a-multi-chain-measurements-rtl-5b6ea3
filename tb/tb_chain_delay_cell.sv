`timescale 1ps/1fs
// tb_chain_delay_cell -- self-checking test of the inter-chain delay model:
// after each edge of the input, the output must still hold its old level
// 0.5 ps before DELAY_PS and the new level 0.5 ps after, for the default
// delay and an overridden one.
module tb_chain_delay_cell;
  localparam real D_DEF = (6250.0 / 260.0) * (1.0 + 1.0 / 8.0);
  localparam real D_ALT = 51.5;
  logic in = 0;
  logic out_def, out_alt;
  int checks = 0, failures = 0;

  chain_delay_cell                     dut_def (.in(in), .out(out_def));
  chain_delay_cell #(.DELAY_PS(D_ALT)) dut_alt (.in(in), .out(out_alt));

  task automatic check(logic got, logic want, string what);
    checks++;
    if (got !== want) begin
      failures++;
      $display("FAIL %s at %0t: out=%0b expected=%0b", what, $realtime, got, want);
    end
  endtask

  initial begin
    #1000;
    for (int i = 0; i < 20; i++) begin
      #(real'($urandom_range(200, 2000)) + 0.123);
      in = ~in;
      #(D_DEF - 0.5);          check(out_def, ~in, "default before");
      #1.0;                    check(out_def,  in, "default after");
      #(D_ALT - D_DEF - 1.0);  check(out_alt, ~in, "override before");
      #1.0;                    check(out_alt,  in, "override after");
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

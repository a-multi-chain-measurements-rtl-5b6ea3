`timescale 1ps/1fs
// tb_coarse_counter -- self-checking test of the coarse clock counter:
// count after reset, hold while disabled, wrap-around at 2**W.
module tb_coarse_counter;
  localparam int unsigned W = 6;
  logic clk = 0, rst_n = 0, en = 0;
  logic [W-1:0] count;
  int checks = 0, failures = 0;
  int expect_cnt = 0;

  coarse_counter #(.W(W)) dut (.clk(clk), .rst_n(rst_n), .en(en), .count(count));

  always #3125 clk = ~clk;

  task automatic check(string what);
    checks++;
    if (int'(count) != (expect_cnt % (1 << W))) begin
      failures++;
      $display("FAIL %s count=%0d expected=%0d", what, count, expect_cnt % (1 << W));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 check("reset");
    rst_n = 1; en = 1;
    for (int i = 0; i < 150; i++) begin
      @(posedge clk); expect_cnt++;
      #1 check("count");
    end
    en = 0;
    repeat (10) begin
      @(posedge clk);
      #1 check("hold");
    end
    en = 1;
    repeat (20) begin
      @(posedge clk); expect_cnt++;
      #1 check("resume");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

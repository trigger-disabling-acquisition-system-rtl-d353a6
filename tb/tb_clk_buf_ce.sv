// tb_clk_buf_ce: self-checking test of the clock buffer with enable.
// The enable is changed at random times in both clock phases. Expected:
// a pulse is passed whole when the enable was high just before its rising
// edge and suppressed whole otherwise; the output is never high while the
// input clock is low and never shows a shortened pulse.
`timescale 1ns/1ps
module tb_clk_buf_ce;
  logic i = 1'b0, ce, o, en_q;
  logic ce_at_rise;
  int checks = 0, failures = 0;
  int passed = 0, blocked = 0;

  clk_buf_ce dut (.i(i), .ce(ce), .o(o), .en_q(en_q));

  // 20 ns period; samples in the middle of each phase and just before edges
  initial begin
    #300000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ce = 1'b1;
    #10;
    for (int n = 0; n < 2000; n++) begin
      // low phase: 10 ns; enable may change anywhere in it before the edge
      if ($urandom % 2) begin #3; ce = 1'(($urandom % 3) != 0); #6; end
      else #9;
      ce_at_rise = ce;
      #1 i = 1'b1;
      // high phase: the enable changes in it must not affect this pulse
      #1;
      checks++;
      if (o !== ce_at_rise || en_q !== ce_at_rise) begin
        failures++; $display("FAIL pulse %0d start o=%0b exp=%0b", n, o, ce_at_rise);
      end
      #2; if ($urandom % 2) ce = ~ce;
      #5;
      checks++;
      if (o !== ce_at_rise) begin
        failures++; $display("FAIL pulse %0d cut/glitch o=%0b exp=%0b", n, o, ce_at_rise);
      end
      if (ce_at_rise) passed++; else blocked++;
      #2 i = 1'b0;
      #1;
      checks++;
      if (o !== 1'b0) begin failures++; $display("FAIL output high in low phase"); end
    end
    checks++;
    if (passed == 0 || blocked == 0) begin
      failures++; $display("FAIL coverage passed=%0d blocked=%0d", passed, blocked);
    end
    $display("passed=%0d blocked=%0d", passed, blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

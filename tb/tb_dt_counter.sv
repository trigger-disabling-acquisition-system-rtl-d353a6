// tb_dt_counter: self-checking test of the dead-time counter.
// Drives random count-enable and clear patterns and compares the count with
// a reference model every clock; also checks wrap-around of a narrow counter.
`timescale 1ns/1ps
module tb_dt_counter;
  localparam int W = 6;
  logic clk = 1'b0, rst_n, ce, clr;
  logic [W-1:0] q;
  logic [W-1:0] ref_q;
  int checks = 0, failures = 0;

  dt_counter #(.CNT_W(W)) dut (.clk(clk), .rst_n(rst_n), .ce(ce), .clr(clr), .q(q));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b1; #1 rst_n = 1'b0; ce = 1'b0; clr = 1'b0; ref_q = '0;
    repeat (2) @(negedge clk);
    checks++; if (q !== '0) begin failures++; $display("FAIL reset q=%0d", q); end
    rst_n = 1'b1;
    // count 100 times in a row: wraps past 63
    ce = 1'b1;
    repeat (100) begin
      @(negedge clk);
      ref_q = ref_q + 1'b1;
      checks++;
      if (q !== ref_q) begin failures++; $display("FAIL count q=%0d ref=%0d", q, ref_q); end
    end
    for (int i = 0; i < 2000; i++) begin
      ce  = ($urandom % 4) != 0;
      clr = ($urandom % 9) == 0;
      @(negedge clk);
      if (clr)     ref_q = '0;
      else if (ce) ref_q = ref_q + 1'b1;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("FAIL step %0d ce=%0b clr=%0b q=%0d ref=%0d", i, ce, clr, q, ref_q);
      end
    end
    // asynchronous reset in mid-cycle
    ce = 1'b1; clr = 1'b0;
    #2 rst_n = 1'b0; #1;
    checks++; if (q !== '0) begin failures++; $display("FAIL async reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cmp_eq: self-checking test of the equality comparator, with equal,
// single-bit-different and random operands.
`timescale 1ns/1ps
module tb_cmp_eq;
  localparam int W = 16;
  logic [W-1:0] a, b;
  logic eq;
  int checks = 0, failures = 0;

  cmp_eq #(.W(W)) dut (.a(a), .b(b), .eq(eq));

  task automatic check(logic [W-1:0] x, logic [W-1:0] y);
    a = x; b = y; #1;
    checks++;
    if (eq !== (x == y)) begin
      failures++;
      $display("FAIL a=%h b=%h eq=%0b", x, y, eq);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      automatic logic [W-1:0] x = W'($urandom);
      check(x, x);
      check(x, x ^ (W'(1) << ($urandom % W)));
      check(x, W'($urandom));
    end
    for (int k = 0; k < W; k++) check(W'(1) << k, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

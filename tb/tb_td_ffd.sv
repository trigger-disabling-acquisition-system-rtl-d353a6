// tb_td_ffd: self-checking test of the trigger-disable flip-flop.
// Checks that either detector's rising edge sets q, that q holds through
// further edges, that clr and reset clear it, and that clr dominates.
`timescale 1ns/1ps
module tb_td_ffd;
  logic [1:0] det;
  logic clr, rst_n, q;
  int checks = 0, failures = 0;

  td_ffd #(.NUM_DET(2)) dut (.det(det), .clr(clr), .rst_n(rst_n), .q(q));

  task automatic expect_q(logic exp, string what);
    #1;
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL %s: q=%0b expected %0b", what, q, exp);
    end
  endtask

  task automatic pulse(int d);
    det[d] = 1'b1; #5; det[d] = 1'b0; #5;
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    det = '0; clr = 1'b0; rst_n = 1'b1; #1 rst_n = 1'b0;
    #10; expect_q(1'b0, "reset");
    rst_n = 1'b1; #10; expect_q(1'b0, "after reset");
    pulse(0);  expect_q(1'b1, "D0 click sets");
    pulse(1);  expect_q(1'b1, "second click holds");
    pulse(0);  expect_q(1'b1, "third click holds");
    clr = 1'b1; #2; clr = 1'b0; expect_q(1'b0, "EQ clears");
    pulse(1);  expect_q(1'b1, "D1 click sets");
    clr = 1'b1; expect_q(1'b0, "EQ clears again");
    pulse(0);  expect_q(1'b0, "clear dominates D0");
    pulse(1);  expect_q(1'b0, "clear dominates D1");
    clr = 1'b0; #5; expect_q(1'b0, "no click after clear");
    det = 2'b11; #5; det = 2'b00; expect_q(1'b1, "coincidence sets");
    rst_n = 1'b0; expect_q(1'b0, "reset clears");
    rst_n = 1'b1; #5;
    // random sequence against a reference
    begin
      automatic logic ref_q = 1'b0;
      automatic logic [1:0] prev = 2'b00;
      for (int i = 0; i < 400; i++) begin
        automatic logic [1:0] nd = 2'($urandom);
        automatic logic nc = ($urandom % 5) == 0;
        clr = nc; #1;
        if (nc) ref_q = 1'b0;
        det = nd; #1;
        if (!nc && ((|nd) && !(|prev))) ref_q = 1'b1;
        prev = nd;
        checks++;
        if (q !== ref_q) begin
          failures++;
          $display("FAIL random step %0d: q=%0b ref=%0b", i, q, ref_q);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

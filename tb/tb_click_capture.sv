// tb_click_capture: self-checking test of the per-detector click flags.
// Each flag must be set only by its own detector, hold until cleared, and be
// held low while clr is asserted.
`timescale 1ns/1ps
module tb_click_capture;
  localparam int ND = 2;
  logic [ND-1:0] det, click, ref_c, prev;
  logic clr, rst_n;
  int checks = 0, failures = 0;

  click_capture #(.NUM_DET(ND)) dut (.det(det), .clr(clr), .rst_n(rst_n), .click(click));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    det = '0; clr = 1'b0; rst_n = 1'b1; #1 rst_n = 1'b0; ref_c = '0; prev = '0;
    #5; checks++; if (click !== '0) begin failures++; $display("FAIL reset"); end
    rst_n = 1'b1; #5;
    for (int i = 0; i < 1000; i++) begin
      automatic logic [ND-1:0] nd = ND'($urandom);
      automatic logic nc = ($urandom % 4) == 0;
      clr = nc; #1;
      if (nc) ref_c = '0;
      det = nd; #1;
      if (!nc) ref_c = ref_c | (nd & ~prev);
      prev = nd;
      checks++;
      if (click !== ref_c) begin
        failures++;
        $display("FAIL step %0d det=%b clr=%0b click=%b ref=%b", i, nd, nc, click, ref_c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

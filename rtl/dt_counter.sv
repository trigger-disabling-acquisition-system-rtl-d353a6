// dt_counter: dead-time counter (COUNTER).
//
// A binary up-counter on the ungated trigger clock. While ce (the FFD output)
// is high it advances once per trigger period; clr (the comparator's EQ)
// returns it to zero on the next clock edge and takes priority over ce. It
// thus measures how many trigger periods have passed since a detection.
//
// Interface: clk = clock source, rst_n asynchronous reset (active low),
// ce count enable, clr synchronous clear, q count (CNT_W bits).
// Timing: q changes one clock-to-q after a rising clk edge.
//
// Counting with CE and clearing from EQ follow the original circuit; the clear
// being synchronous and the counter width are this design's choices.
`timescale 1ns / 1ps
module dt_counter #(
  parameter int unsigned CNT_W = td_pkg::CNT_W_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             ce,
  input  logic             clr,
  output logic [CNT_W-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= '0;
    else if (clr) q <= '0;
    else if (ce)  q <= q + 1'b1;
  end
endmodule

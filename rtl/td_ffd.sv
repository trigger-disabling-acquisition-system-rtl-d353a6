// td_ffd: the trigger-disable flip-flop (FFD).
//
// A D flip-flop whose D input is tied to '1' and whose clock is the OR of the
// detector outputs. The first rising avalanche edge of any detector sets q,
// which (through an inverter) removes the clock enable of the trigger clock
// buffer and enables the dead-time counter. q stays set, whatever the
// detectors do, until the comparator's EQ clears it asynchronously.
//
// Interface: det[NUM_DET] raw detector pulses (asynchronous to every clock),
// clr = comparator EQ, rst_n = power-on reset (active low), q = disable flag.
// Timing: q rises one clock-to-q after the first detector edge and falls as
// soon as clr or !rst_n is asserted; the clear dominates a detector edge.
//
// The D='1' flip-flop, the detector clock and the EQ clear are the original
// circuit; the OR of two detectors is its pairwise variant. The power-on reset
// is an addition of this design.
`timescale 1ns / 1ps
module td_ffd #(
  parameter int unsigned NUM_DET = td_pkg::NUM_DET_DEF
) (
  input  logic [NUM_DET-1:0] det,
  input  logic               clr,
  input  logic               rst_n,
  output logic               q
);
  logic det_any;   // OR gate in front of the clock pin C
  logic aclr;      // active-high asynchronous clear

  assign det_any = |det;
  assign aclr    = clr | ~rst_n;

  always_ff @(posedge det_any or posedge aclr) begin
    if (aclr) q <= 1'b0;
    else      q <= 1'b1;
  end
endmodule

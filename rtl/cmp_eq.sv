// cmp_eq: binary comparator (COMP).
//
// Compares the programmed dead time a (CMP VALUE) with the counter value b and
// raises eq while they are equal. eq is combinational; in the system it clears
// the FFD asynchronously and the counter at the next clock edge.
//
// Interface: a, b (W bits each), eq. Timing: combinational.
// The A/B/EQ comparator follows the original circuit; its width is this
// design's choice.
`timescale 1ns / 1ps
module cmp_eq #(
  parameter int unsigned W = td_pkg::CNT_W_DEF
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         eq
);
  always_comb eq = (a == b);
endmodule

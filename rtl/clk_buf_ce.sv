// clk_buf_ce: clock buffer with clock enable (CLK BUF).
//
// Passes the clock i to o while ce is high and holds o low while ce is low,
// without cutting or stretching a pulse. The enable is caught in a latch that
// is transparent while i is low, so a change of ce during the high phase only
// acts on the next pulse: the common glitch-free clock gate, with the same
// behaviour as the FPGA global clock buffer with enable that the original
// circuit uses. en_q (the latched enable) tells whether the current pulse is
// being passed; the memory uses it to know which trigger reached the
// detectors.
//
// Interface: i clock source, ce enable (inverted FFD output), o CLOCK OUTPUT,
// en_q latched enable. Timing: ce must settle before the rising edge of i to
// act on that pulse.
//
// The latch is intentional: it is what makes the gate glitch-free.
`timescale 1ns / 1ps
module clk_buf_ce (
  input  logic i,
  input  logic ce,
  output logic o,
  output logic en_q
);
  always_latch begin
    if (!i) en_q = ce;
  end

  assign o = i & en_q;
endmodule

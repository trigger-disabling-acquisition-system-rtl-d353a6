// spad_model: behavioural model of a gated single-photon avalanche detector.
// Not synthesizable; used by the testbenches only.
//
// On each rising edge of trig (a gate) the model clicks with probability
// p_thr / 2^32 unless it is still inside its dead time. A click produces an
// output pulse of PULSE_NS starting RESP_NS after the gate (detector response
// plus cabling), and starts a dead time of DEAD_NS from the click, during
// which the detector is blind. Gates that arrive while blind are counted in
// blind_gates: with trigger disabling working this count stays zero. clicks
// counts the clicks. Time unit: 1 ns.
`timescale 1ns/1ps
module spad_model #(
  parameter int unsigned RESP_NS  = 36,
  parameter int unsigned PULSE_NS = 10,
  parameter int unsigned DEAD_NS  = 4900
) (
  input  logic        trig,
  input  int unsigned p_thr,
  output logic        out,
  output int unsigned clicks,
  output int unsigned blind_gates
);
  realtime live_at;   // end of the current dead time

  initial begin
    out         = 1'b0;
    clicks      = 0;
    blind_gates = 0;
    live_at     = 0;
  end

  always @(posedge trig) begin
    if ($realtime < live_at) begin
      blind_gates++;
    end else if ($urandom < p_thr) begin
      clicks++;
      live_at = $realtime + RESP_NS + DEAD_NS;
      fork
        begin
          #(RESP_NS) out = 1'b1;
          #(PULSE_NS) out = 1'b0;
        end
      join_none
    end
  end
endmodule

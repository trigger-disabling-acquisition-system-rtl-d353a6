// click_capture: per-detector detection flags.
//
// A detector's avalanche is a short pulse that ends long before the next
// clock edge. One flag per detector is set by that detector's rising edge and
// held until the comparator's EQ (or reset) clears it, exactly like the FFD,
// so the cache memory can sample, one trigger period after a trigger, which
// detectors fired on it, coincidences included.
//
// Interface: det[NUM_DET] detector pulses, clr = EQ, rst_n reset (active low),
// click[NUM_DET] flags. Timing: a flag rises one clock-to-q after its
// detector's edge and falls asynchronously with clr.
//
// The original circuit only says that extra elements are needed to tie the
// recorded result to the detection; these flags are this design's choice.
`timescale 1ns / 1ps
module click_capture #(
  parameter int unsigned NUM_DET = td_pkg::NUM_DET_DEF
) (
  input  logic [NUM_DET-1:0] det,
  input  logic               clr,
  input  logic               rst_n,
  output logic [NUM_DET-1:0] click
);
  logic aclr;
  assign aclr = clr | ~rst_n;

  for (genvar d = 0; d < NUM_DET; d++) begin : g_flag
    logic flag;
    always_ff @(posedge det[d] or posedge aclr) begin
      if (aclr) flag <= 1'b0;
      else      flag <= 1'b1;
    end
    assign click[d] = flag;
  end
endmodule

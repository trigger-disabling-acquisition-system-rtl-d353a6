// td_acq_top: trigger-disabling acquisition system.
//
// A gated single-photon detector is blind for a dead time after every click,
// yet the trigger clock keeps running faster than that. This block closes a
// feedback loop around the detectors: any detector click sets the FFD, whose
// inverted output removes the enable of the trigger clock buffer, so neither
// the detectors nor the cache memory see a trigger; the counter then counts
// clock-source periods and, when it equals cmp_value, the comparator clears
// the FFD and the triggers resume. With two detectors ORed into the FFD both
// are always triggered together, so one can never be live while the other is
// dead (the "self-blinding" that makes a key non-random).
//
// Data path: per-detector click flags are sampled one clock-source period
// after each trigger that passed the clock buffer and written to the next word
// of the cache block; suppressed triggers write nothing.
//
// Timing, with cmp_value = M >= 1: a click on trigger k (it must arrive
// before the rising edge of trigger k+1: the response time must be shorter
// than the trigger period) suppresses exactly triggers k+1 .. k+M; trigger
// k+M+1 reaches the detectors. The result of trigger k is written at the
// rising edge of trigger k+1.
//
// Ports: clk_src CLOCK SOURCE, rst_n asynchronous reset, det detector outputs,
// cmp_value dead time in trigger periods, clk_out CLOCK OUTPUT (detector
// trigger), disabled FFD output, plus the host side of the cache memory.
//
// The FFD / COUNTER / COMP / inverter / CLK BUF loop and the OR of the
// detectors follow the original circuit. The click flags, the one-period write
// delay, the reset (which also holds the trigger off) and the host interface
// are this design's choices.
`timescale 1ns / 1ps
module td_acq_top #(
  parameter int unsigned NUM_DET = td_pkg::NUM_DET_DEF,
  parameter int unsigned CNT_W   = td_pkg::CNT_W_DEF,
  parameter int unsigned DEPTH   = td_pkg::CACHE_DEPTH_DEF,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic               clk_src,
  input  logic               rst_n,
  input  logic [NUM_DET-1:0] det,
  input  logic [CNT_W-1:0]   cmp_value,
  output logic               clk_out,
  output logic               disabled,
  input  logic               release_blk,
  input  logic [AW-1:0]      rd_addr,
  output logic [NUM_DET-1:0] rd_data,
  output logic               full,
  output logic [AW:0]        fill,
  output logic               dropped
);
  logic               ffd_q;
  logic               eq;
  logic [CNT_W-1:0]   count;
  logic               buf_ce;
  logic               trig_en;      // current clock pulse goes to the detectors
  logic               trig_prev;    // previous clock pulse went to the detectors
  logic [NUM_DET-1:0] click;

  td_ffd #(.NUM_DET(NUM_DET)) u_ffd (
    .det(det), .clr(eq), .rst_n(rst_n), .q(ffd_q)
  );

  dt_counter #(.CNT_W(CNT_W)) u_counter (
    .clk(clk_src), .rst_n(rst_n), .ce(ffd_q), .clr(eq), .q(count)
  );

  cmp_eq #(.W(CNT_W)) u_comp (
    .a(cmp_value), .b(count), .eq(eq)
  );

  // Inverter between the FFD output and the clock-enable of the buffer.
  // No trigger leaves while the loop is held in reset: a click then could
  // not start a dead time.
  assign buf_ce = ~ffd_q & rst_n;

  clk_buf_ce u_clk_buf (
    .i(clk_src), .ce(buf_ce), .o(clk_out), .en_q(trig_en)
  );

  click_capture #(.NUM_DET(NUM_DET)) u_capture (
    .det(det), .clr(eq), .rst_n(rst_n), .click(click)
  );

  always_ff @(posedge clk_src or negedge rst_n) begin
    if (!rst_n) trig_prev <= 1'b0;
    else        trig_prev <= trig_en;
  end

  cache_mem #(.DEPTH(DEPTH), .NUM_DET(NUM_DET)) u_mem (
    .clk(clk_src), .rst_n(rst_n),
    .we(trig_prev), .wdata(click),
    .release_blk(release_blk),
    .rd_addr(rd_addr), .rd_data(rd_data),
    .full(full), .fill(fill), .dropped(dropped)
  );

  assign disabled = ffd_q;

// A dead time of zero periods would hold the FFD cleared for good.
  a_cmp_nonzero: assert property (@(posedge clk_src) disable iff (!rst_n) cmp_value != '0)
    else $error("cmp_value must be at least 1");
  // A trigger reaching the detectors finds the FFD clear.
  a_no_trigger_when_disabled: assert property (@(posedge clk_src) disable iff (!rst_n)
    trig_en |-> !ffd_q)
    else $error("trigger passed while disabled");
endmodule

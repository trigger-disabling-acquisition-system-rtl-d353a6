// cache_mem: cache memory of detection results (MEMORY).
//
// Stores one NUM_DET-bit word per trigger that reached the detectors, in
// order, at consecutive addresses of a DEPTH-word block. Triggers that the
// clock buffer suppressed during a dead time never produce a write, so the
// block holds no futile zeroes. When DEPTH words are stored, full rises and
// stays until the host, having read the block, pulses release_blk; a result
// that arrives while the block is full is lost and flagged on dropped.
//
// Interface (all on clk, the ungated trigger clock):
//   we, wdata     write one word at address fill, fill increments;
//   full, fill    block state;
//   rd_addr/rd_data  synchronous read port, data one cycle after the address;
//   release_blk   restart the block at address 0 (takes priority over we);
//   dropped       one-cycle pulse for a write refused while full.
//
// The block size (8192 words) is the number of triggers per cache block of
// the original performance model; the host handshake, the drop behaviour and
// the read port are this design's choices.
`timescale 1ns / 1ps
module cache_mem #(
  parameter int unsigned DEPTH   = td_pkg::CACHE_DEPTH_DEF,
  parameter int unsigned NUM_DET = td_pkg::NUM_DET_DEF,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               we,
  input  logic [NUM_DET-1:0] wdata,
  input  logic               release_blk,
  input  logic [AW-1:0]      rd_addr,
  output logic [NUM_DET-1:0] rd_data,
  output logic               full,
  output logic [AW:0]        fill,
  output logic               dropped
);
  logic [NUM_DET-1:0] mem [DEPTH];

  assign full = (fill == (AW+1)'(DEPTH));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill    <= '0;
      dropped <= 1'b0;
    end else begin
      dropped <= 1'b0;
      if (release_blk)  fill <= '0;
      else if (we) begin
        if (full) dropped <= 1'b1;
        else      fill    <= fill + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we && !full && !release_blk) mem[fill[AW-1:0]] <= wdata;
    rd_data <= mem[rd_addr];
  end
endmodule

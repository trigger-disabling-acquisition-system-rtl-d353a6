// tb_workload_single: the single-detector acquisition run (cache-occupancy
// measurement) at its published operating point.
//
// One detector (NUM_DET = 1) behind the trigger-disabling loop, 4 MHz
// triggers, mean photon number 0.1 and detector efficiency 0.1, so a gate
// clicks with probability P = 1 - exp(-0.01) = 0.00995; after a click the
// loop suppresses M = 20 triggers. Three complete 8192-word cache blocks are
// recorded and read back. For each block the test checks that every stored
// word belongs to a trigger that found the detector live (useful fraction
// 100 %), that the number of ones in the block equals the detector's clicks
// on those triggers, and that the click count is statistically plausible
// (N*P = 81.5, accepted 40..130). For comparison it prints the useful
// fraction that standard triggering would give, (N - kM)/N with
// k = N*P/(1+P*M), about 83.4 %.
`timescale 1ns/1ps
module tb_workload_single;
  localparam int DEPTH = 8192;
  localparam int AW = $clog2(DEPTH);
  localparam int M = 20;
  localparam int BLOCKS = 3;
  localparam real P = 0.0099502;

  logic clk_src = 1'b0, rst_n, clk_out, disabled, release_blk, full, dropped;
  logic [0:0] det, rd_data;
  logic [15:0] cmp_value;
  logic [AW-1:0] rd_addr;
  logic [AW:0] fill;
  int unsigned p_thr, clicks, blind;
  int checks = 0, failures = 0;
  int n_suppress_events = 0;

  td_acq_top #(.NUM_DET(1), .CNT_W(16), .DEPTH(DEPTH)) dut (
    .clk_src(clk_src), .rst_n(rst_n), .det(det), .cmp_value(cmp_value),
    .clk_out(clk_out), .disabled(disabled), .release_blk(release_blk),
    .rd_addr(rd_addr), .rd_data(rd_data), .full(full), .fill(fill), .dropped(dropped));

  spad_model #(.RESP_NS(36), .PULSE_NS(10), .DEAD_NS(4900)) u_spad (
    .trig(clk_out), .p_thr(p_thr), .out(det[0]), .clicks(clicks), .blind_gates(blind));

  always #125 clk_src = ~clk_src;
  always @(posedge disabled) n_suppress_events++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #200ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real k_off, p_off;
    k_off = DEPTH * P / (1.0 + P * M);
    p_off = 100.0 * (DEPTH - k_off * M) / DEPTH;
    $display("standard triggering model: k=%0.1f useful=%0.1f%%", k_off, p_off);

    rst_n = 1'b1; #1 rst_n = 1'b0; cmp_value = 16'(M); release_blk = 1'b0; rd_addr = '0;
    p_thr = 32'(longint'(P * 4294967296.0));
    repeat (3) @(negedge clk_src);
    rst_n = 1'b1;
    for (int b = 0; b < BLOCKS; b++) begin
      int unsigned c0, bl0, ones, c_at_full;
      c0 = clicks; bl0 = blind;
      wait (full);
      // results of later triggers are dropped while the host reads; the
      // detector clicks counted for this block are those stored in it
      chk(blind == bl0, $sformatf("block %0d: %0d gates reached a blind detector", b, blind - bl0));
      ones = 0;
      c_at_full = clicks - c0;
      begin
        for (int a = 0; a < DEPTH; a++) begin
          @(negedge clk_src); rd_addr = AW'(a);
          @(posedge clk_src); #2;
          ones += rd_data[0];
        end
        // the last stored trigger's click may not be counted yet at full
        chk(ones == c_at_full || ones + 1 == c_at_full,
            $sformatf("block %0d: %0d ones stored, %0d clicks", b, ones, c_at_full));
      end
      chk(ones >= 40 && ones <= 130, $sformatf("block %0d: click count %0d implausible", b, ones));
      $display("block %0d: %0d triggers stored, %0d clicks, useful %0.1f%%",
               b, DEPTH, ones, 100.0 * (DEPTH - (blind - bl0)) / DEPTH);
      @(negedge clk_src); release_blk = 1'b1;
      @(negedge clk_src); release_blk = 1'b0;
    end
    chk(n_suppress_events > 0, "trigger suppression happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

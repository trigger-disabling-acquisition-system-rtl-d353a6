// tb_td_acq_top: end-to-end test of the trigger-disabling acquisition system
// at its default parameters (two detectors, 16-bit counter, 8192-word cache
// block), under bright light as in the pairwise self-blinding experiment.
//
// Two detector models share the gated trigger clk_out. Each clicks on a gate
// with probability 0.18 and is blind for 4.9 us after a click; the trigger
// period is 250 ns (4 MHz) and cmp_value = 20, so the programmed dead time
// (20 periods = 5 us) covers the detectors' own. Checked:
//   - no gate ever reaches a blind detector (neither of the two);
//   - after a trigger with a click exactly cmp_value triggers are suppressed,
//     after a trigger without one none is;
//   - the cache holds, in order, one word per passed trigger with the
//     detectors that clicked on it (coincidences included);
//   - full rises after 8192 words, later results are dropped, release_blk
//     restarts the block and writing resumes.
// The string of single-detector events (D0 alone = 0, D1 alone = 1) must not
// be anti-correlated: the fraction of neighbours that differ has to stay
// near one half (accepted 0.40 .. 0.60), where a self-blinded pair of
// detectors would give nearly 1.
// Every mechanism (suppression, counter expiry, D0-only, D1-only and double
// clicks, block full, drop, release) must occur at least once.
`timescale 1ns/1ps
module tb_td_acq_top;
  import td_pkg::*;
  localparam int ND    = NUM_DET_DEF;
  localparam int DEPTH = CACHE_DEPTH_DEF;
  localparam int AW    = $clog2(DEPTH);
  localparam int M     = 20;
  localparam real T_NS = 250.0;

  logic clk_src = 1'b0, rst_n;
  logic [ND-1:0] det;
  logic [CNT_W_DEF-1:0] cmp_value;
  logic clk_out, disabled, release_blk, full, dropped;
  logic [AW-1:0] rd_addr;
  logic [ND-1:0] rd_data;
  logic [AW:0] fill;
  int unsigned p_thr;
  int unsigned clicks [ND];
  int unsigned blind [ND];

  int checks = 0, failures = 0;
  // mechanism counters
  int n_suppressed = 0, n_expiry = 0, n_d0 = 0, n_d1 = 0, n_coinc = 0;
  int n_full = 0, n_drop = 0, n_release = 0;

  td_acq_top dut (
    .clk_src(clk_src), .rst_n(rst_n), .det(det), .cmp_value(cmp_value),
    .clk_out(clk_out), .disabled(disabled), .release_blk(release_blk),
    .rd_addr(rd_addr), .rd_data(rd_data), .full(full), .fill(fill), .dropped(dropped));

  for (genvar d = 0; d < ND; d++) begin : g_spad
    spad_model #(.RESP_NS(36), .PULSE_NS(10), .DEAD_NS(4900)) u_spad (
      .trig(clk_out), .p_thr(p_thr), .out(det[d]), .clicks(clicks[d]), .blind_gates(blind[d]));
  end

  always #(T_NS/2) clk_src = ~clk_src;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---- scoreboard: which detectors clicked on each passed trigger ----
  logic [ND-1:0] cur_word;
  logic [ND-1:0] exp_q [$];
  logic          pass_prev = 1'b0;
  logic [ND-1:0] last_word = '0;
  int            gap = 0;
  logic          first_pass = 1'b1;
  logic          monitor_on = 1'b0;

  for (genvar d = 0; d < ND; d++) begin : g_mon
    always @(posedge det[d]) cur_word[d] = 1'b1;
  end

  always @(posedge clk_src) begin
    if (monitor_on) begin
      if (pass_prev) begin
        exp_q.push_back(cur_word);
        last_word = cur_word;
        if (cur_word == 2'b01) n_d0++;
        if (cur_word == 2'b10) n_d1++;
        if (cur_word == 2'b11) n_coinc++;
      end
    end
    cur_word = '0;
    #1;
    if (monitor_on) begin
      if (clk_out) begin
        if (!first_pass) begin
          chk(gap == ((last_word != '0) ? M : 0),
              $sformatf("suppressed %0d triggers after word %b", gap, last_word));
          if (gap != 0) begin n_suppressed += gap; n_expiry++; end
        end
        first_pass = 1'b0;
        gap = 0;
      end else gap++;
    end
    pass_prev = clk_out;
    if (dropped) n_drop++;
  end

  initial begin
    #100ms;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int extra;
    rst_n = 1'b1; #1 rst_n = 1'b0; cmp_value = CNT_W_DEF'(M); release_blk = 1'b0; rd_addr = '0;
    p_thr = 32'd773094113;   // 0.18 * 2^32
    repeat (3) @(negedge clk_src);
    rst_n = 1'b1;
    @(negedge clk_src);
    monitor_on = 1'b1;

    // fill one block
    wait (full);
    n_full++;
    chk(fill == (AW+1)'(DEPTH), "fill at full");
    // keep triggering until a few results were dropped
    repeat (200) @(negedge clk_src);
    monitor_on = 1'b0;
    extra = exp_q.size() - DEPTH;
    chk(extra > 0, "results after full");
    chk(n_drop == extra || n_drop == extra - 1, $sformatf("dropped %0d of %0d", n_drop, extra));
    // host reads the block
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk_src); rd_addr = AW'(a);
      @(posedge clk_src); #2;
      chk(rd_data == exp_q[a], $sformatf("cache word %0d = %b, expected %b", a, rd_data, exp_q[a]));
    end
    begin
      int n_single, n_alt;
      logic prev_bit;
      real alt;
      n_single = 0; n_alt = 0; prev_bit = 1'b0;
      for (int a = 0; a < DEPTH; a++) begin
        if (exp_q[a] == 2'b01 || exp_q[a] == 2'b10) begin
          if (n_single > 0 && (exp_q[a][1] != prev_bit)) n_alt++;
          prev_bit = exp_q[a][1];
          n_single++;
        end
      end
      alt = real'(n_alt) / real'(n_single - 1);
      $display("single-detector events %0d, alternation fraction %0.3f", n_single, alt);
      chk(alt > 0.40 && alt < 0.60, "single-detector string is not anti-correlated");
    end
    for (int d = 0; d < ND; d++) begin
      chk(blind[d] == 0, $sformatf("detector %0d gated %0d times while blind", d, blind[d]));
      $display("detector %0d: %0d clicks, %0d gates while blind", d, clicks[d], blind[d]);
    end
    // release and refill a little
    @(negedge clk_src); release_blk = 1'b1; n_release++;
    @(negedge clk_src); release_blk = 1'b0;
    chk(fill == 0 && !full, "block empty after release");
    repeat (400) @(negedge clk_src);
    chk(fill > 0 && !full, "writing resumes after release");

    $display("suppressed=%0d expiries=%0d d0=%0d d1=%0d coinc=%0d full=%0d drop=%0d release=%0d",
             n_suppressed, n_expiry, n_d0, n_d1, n_coinc, n_full, n_drop, n_release);
    chk(n_suppressed > 0, "suppression happened");
    chk(n_expiry > 0, "counter expiry happened");
    chk(n_d0 > 0, "D0-only clicks happened");
    chk(n_d1 > 0, "D1-only clicks happened");
    chk(n_coinc > 0, "coincidences happened");
    chk(n_full > 0 && n_drop > 0 && n_release > 0, "full, drop and release happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cache_mem: self-checking test of the cache memory at a small depth.
// Writes random words with random gaps, checks fill and full, overflows the
// block and checks dropped, reads the block back, releases it and refills it.
`timescale 1ns/1ps
module tb_cache_mem;
  localparam int DEPTH = 32;
  localparam int ND = 2;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n, we, release_blk, full, dropped;
  logic [ND-1:0] wdata, rd_data;
  logic [AW-1:0] rd_addr;
  logic [AW:0] fill;
  logic [ND-1:0] model [DEPTH];
  int nwr;
  int checks = 0, failures = 0;

  cache_mem #(.DEPTH(DEPTH), .NUM_DET(ND)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .wdata(wdata), .release_blk(release_blk),
    .rd_addr(rd_addr), .rd_data(rd_data), .full(full), .fill(fill), .dropped(dropped));

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic fill_block(int extra);
    nwr = 0;
    while (nwr < DEPTH + extra) begin
      @(negedge clk);
      we = $urandom % 2;
      wdata = ND'($urandom);
      if (we && nwr < DEPTH) model[nwr] = wdata;
      @(posedge clk); #1;
      if (we) begin
        chk(dropped == (nwr >= DEPTH), $sformatf("dropped at write %0d", nwr));
        nwr++;
      end else chk(!dropped, "no drop without write");
      chk(fill == ((nwr < DEPTH) ? nwr : DEPTH), $sformatf("fill %0d vs %0d", fill, nwr));
      chk(full == (nwr >= DEPTH), "full flag");
    end
    @(negedge clk); we = 1'b0;
  endtask

  task automatic read_block();
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); rd_addr = AW'(a);
      @(posedge clk); #1;
      chk(rd_data == model[a], $sformatf("read addr %0d got %b exp %b", a, rd_data, model[a]));
    end
  endtask

  initial begin
    #500000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b1; #1 rst_n = 1'b0; we = 1'b0; wdata = '0; release_blk = 1'b0; rd_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    chk(fill == 0 && !full, "empty after reset");
    fill_block(5);
    read_block();
    @(negedge clk); release_blk = 1'b1;
    @(negedge clk); release_blk = 1'b0;
    chk(fill == 0 && !full, "empty after release");
    fill_block(3);
    read_block();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

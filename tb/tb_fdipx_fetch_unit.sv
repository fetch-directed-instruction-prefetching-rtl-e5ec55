// Testbench for fdipx_fetch_unit. The testbench models the FTQ (a queue of
// fetch blocks) and the L1-I (a set of present blocks whose line data is a
// fixed function of the address, filled LAT cycles after a miss request).
// Checks: every bundle carries the right start, count and instruction
// words, in FTQ order; exactly one miss request per missing block; no
// demand lookup while a miss waits for its fill; the
// output holds while the core is not ready; a flush drops the bundle.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_fetch_unit;
  import fdipx_pkg::*;
  localparam int FW = 4, LAT = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic fill_valid; blk_t fill_blk;
  logic flush, head_valid, pop, dmd_valid, dmd_hit, miss_valid, miss_ready, out_valid, out_ready, ev_dmd_miss;
  ftq_entry_t head_entry;
  blk_t dmd_blk, miss_blk;
  logic [LINE_BITS-1:0] dmd_line;
  pc_t out_pc;
  logic [CNT_W-1:0] out_count;
  logic [INSTR_W-1:0] out_instr [FW];

  always #5 clk = ~clk;
  fdipx_fetch_unit #(.FETCH_WIDTH(FW)) dut (.*);

  function automatic logic [31:0] word_of(pc_t pc);
    return 32'(pc) ^ 32'hC0DE_0000;
  endfunction

  ftq_entry_t ftq [$];
  ftq_entry_t sent [$];
  bit present [blk_t];
  int fill_at [blk_t];
  int miss_reqs [blk_t];
  int cyc = 0;

  assign head_valid = ftq.size() > 0;
  assign head_entry = head_valid ? ftq[0] : '0;
  always_comb begin
    dmd_hit = dmd_valid && present.exists(dmd_blk);
    for (int i = 0; i < LINE_WORDS; i++) dmd_line[i*32 +: 32] = word_of({dmd_blk, LOFF_W'(i)});
  end
  assign miss_ready = 1'b1;

  always @(posedge clk) begin
    cyc++;
    fill_valid <= 1'b0;
    foreach (fill_at[b]) if (fill_at[b] == cyc) begin
      present[b] = 1; fill_valid <= 1'b1; fill_blk <= b;
    end
    if (rst_n && miss_valid) begin
      miss_reqs[miss_blk] = miss_reqs.exists(miss_blk) ? miss_reqs[miss_blk] + 1 : 1;
      fill_at[miss_blk] = cyc + LAT;
    end
    if (rst_n && pop) sent.push_back(ftq.pop_front());
  end

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int busy_while_waiting = 0;
  always @(posedge clk)
    if (rst_n && dmd_valid && !miss_valid && miss_reqs.exists(dmd_blk) && !present.exists(dmd_blk))
      busy_while_waiting++;

  // collect and check bundles
  int got = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready && !flush) begin
    ftq_entry_t e;
    e = sent.pop_front();
    got++;
    `CHECK_EQ(out_pc, e.start, "bundle start")
    `CHECK_EQ(out_count, e.count, "bundle count")
    for (int k = 0; k < FW; k++)
      if (k < e.count) `CHECK_EQ(out_instr[k], word_of(e.start + pc_t'(k)), "instruction word")
  end

  function automatic ftq_entry_t E(pc_t s, int n);
    ftq_entry_t e; e.start = s; e.count = CNT_W'(n); return e;
  endfunction

  initial begin
    flush = 0; out_ready = 1; fill_valid = 0; fill_blk = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    present[blk_of(46'h100)] = 1;
    ftq.push_back(E(46'h100, 4)); ftq.push_back(E(46'h104, 2));     // hits
    ftq.push_back(E(46'h20C, 4)); ftq.push_back(E(46'h210, 3));     // two misses
    ftq.push_back(E(46'h213, 1));                                   // same block as before
    wait (ftq.size() == 0);
    repeat (3) @(posedge clk);
    `CHECK_EQ(got, 5, "all bundles delivered")
    `CHECK_EQ(miss_reqs[blk_of(46'h20C)], 1, "one request for block 0x20")
    `CHECK_EQ(miss_reqs[blk_of(46'h210)], 1, "one request for block 0x21")
    `CHECK(!miss_reqs.exists(blk_of(46'h100)), "no request for a hit")
    `CHECK_EQ(busy_while_waiting, 0, "L1-I left free while waiting for a fill")
    // backpressure: bundle held while not ready
    @(negedge clk); out_ready = 0; ftq.push_back(E(46'h101, 3)); ftq.push_back(E(46'h108, 4));
    repeat (4) @(negedge clk);
    `CHECK(out_valid && out_pc == 46'h101, "held while not ready")
    `CHECK_EQ(ftq.size(), 1, "second entry waits")
    out_ready = 1;
    wait (ftq.size() == 0); repeat (3) @(posedge clk);
    `CHECK_EQ(got, 7, "delivered after backpressure")
    // flush drops the registered bundle
    @(negedge clk); out_ready = 0; ftq.push_back(E(46'h102, 2));
    @(negedge clk); @(negedge clk);
    `CHECK(out_valid, "bundle waiting")
    flush = 1; void'(sent.pop_front()); @(negedge clk); flush = 0; #1;
    `CHECK(!out_valid, "flush clears output")
    `CHECK_EQ(got, 7, "flushed bundle not delivered")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

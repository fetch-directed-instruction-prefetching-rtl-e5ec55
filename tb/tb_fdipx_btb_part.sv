// Testbench for fdipx_btb_part (8-bit offsets, 128 sets x 6 ways, the
// paper's organisation). Checks: empty after reset; install and lookup of
// type and offset; in-place update; fill of all 6 ways of one set and
// round-robin eviction of way 0 by the 7th branch; invalidation; and that a
// different tag in the same set misses.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_btb_part;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  pc_t lookup_pc, wr_pc, inv_pc;
  logic hit, wr_en, inv_en;
  br_type_e hit_type, wr_type;
  logic [7:0] hit_off, wr_off;

  always #5 clk = ~clk;
  fdipx_btb_part #(.OFF_W(8), .SETS(128), .WAYS(6)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic write(pc_t pc, br_type_e t, logic [7:0] off);
    @(negedge clk); wr_en = 1; wr_pc = pc; wr_type = t; wr_off = off;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic expect_hit(pc_t pc, logic h, br_type_e t, logic [7:0] off, string what);
    lookup_pc = pc; #1;
    `CHECK_EQ(hit, h, {what, " hit"})
    if (h) begin
      `CHECK_EQ(hit_type, t, {what, " type"})
      `CHECK_EQ(hit_off, off, {what, " offset"})
    end
  endtask

  // same set (index 5), different tags
  function automatic pc_t in_set5(int k);
    return pc_t'((64'(k + 1) << 7) | 64'd5);
  endfunction

  initial begin
    wr_en = 0; inv_en = 0; wr_pc = '0; inv_pc = '0; wr_type = BR_COND; wr_off = '0; lookup_pc = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    expect_hit(46'h1234, 0, BR_COND, 0, "empty");
    write(46'h1234, BR_CALL, 8'h7f);
    expect_hit(46'h1234, 1, BR_CALL, 8'h7f, "installed");
    expect_hit(46'h1234 + 46'h80, 0, BR_COND, 0, "same set other tag");
    write(46'h1234, BR_JUMP, 8'h80);
    expect_hit(46'h1234, 1, BR_JUMP, 8'h80, "updated in place");
    // fill set 5 with 6 branches, then a 7th evicts the first (way 0)
    for (int k = 0; k < 6; k++) write(in_set5(k), BR_COND, 8'(k + 1));
    for (int k = 0; k < 6; k++) expect_hit(in_set5(k), 1, BR_COND, 8'(k + 1), "set full");
    write(in_set5(6), BR_RET, 8'h33);
    expect_hit(in_set5(6), 1, BR_RET, 8'h33, "7th installed");
    expect_hit(in_set5(0), 0, BR_COND, 0, "way 0 evicted");
    for (int k = 1; k < 6; k++) expect_hit(in_set5(k), 1, BR_COND, 8'(k + 1), "others kept");
    write(in_set5(7), BR_COND, 8'h44);
    expect_hit(in_set5(1), 0, BR_COND, 0, "round robin: way 1 evicted next");
    // invalidate
    @(negedge clk); inv_en = 1; inv_pc = in_set5(3);
    @(negedge clk); inv_en = 0;
    expect_hit(in_set5(3), 0, BR_COND, 0, "invalidated");
    expect_hit(in_set5(4), 1, BR_COND, 8'd5, "neighbour survives invalidate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench for fdipx_btb at its default size (the paper's 11.5 KB budget).
// Resolved taken branches with offsets at the edges of every partition's
// range are installed; each must come back with the right target and from
// the partition predicted by a reference that counts the bits the offset
// needs. Also: a branch whose target moves to another partition leaves its
// old one, a not-taken update allocates nothing, returns go to the 8-bit
// partition, and a 46-bit target anywhere in the address space is exact.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_btb;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  pc_t lookup_pc, hit_target;
  logic hit; br_type_e hit_type; logic [1:0] hit_part;
  br_update_t upd;

  always #5 clk = ~clk;
  fdipx_btb dut (.*);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // reference: smallest field (8/13/23/46) holding a signed offset
  function automatic int ref_part(longint off);
    if (off >= -128 && off <= 127) return 0;
    if (off >= -4096 && off <= 4095) return 1;
    if (off >= -(64'sd1 <<< 22) && off <= (64'sd1 <<< 22) - 1) return 2;
    return 3;
  endfunction

  task automatic resolve(pc_t pc, br_type_e t, logic tk, pc_t tgt);
    @(negedge clk);
    upd.valid = 1; upd.pc = pc; upd.btype = t; upd.taken = tk; upd.target = tgt;
    @(negedge clk); upd.valid = 0;
  endtask

  task automatic check_branch(pc_t pc, longint off, string what);
    pc_t tgt; int p;
    tgt = pc + pc_t'(off);
    p = ref_part(off);
    resolve(pc, BR_JUMP, 1, tgt);
    lookup_pc = pc; #1;
    `CHECK(hit, {what, ": hit"})
    `CHECK_EQ(hit_target, tgt, {what, ": target"})
    `CHECK_EQ(int'(hit_part), p, {what, ": partition"})
  endtask

  longint offs [] = '{1, -1, 127, -128, 128, -129, 4095, -4096, 4096, -4097,
                      (64'sd1 <<< 22) - 1, -(64'sd1 <<< 22), (64'sd1 <<< 22), -(64'sd1 <<< 22) - 1,
                      64'sd1 <<< 40, -(64'sd1 <<< 44)};

  initial begin
    upd = '0; lookup_pc = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    lookup_pc = 46'h40_0000; #1;
    `CHECK(!hit, "empty after reset")
    foreach (offs[i]) check_branch(pc_t'(46'h1000_0000 + 64'(i) * 64'h321), offs[i], $sformatf("offset %0d", offs[i]));
    // all still present
    foreach (offs[i]) begin
      lookup_pc = pc_t'(46'h1000_0000 + 64'(i) * 64'h321); #1;
      `CHECK_EQ(hit_target, lookup_pc + pc_t'(offs[i]), "still present")
    end
    // move a branch from partition 0 to partition 2 and back
    resolve(46'h2000, BR_COND, 1, 46'h2010);
    lookup_pc = 46'h2000; #1;
    `CHECK_EQ(hit_part, 2'd0, "short conditional in 8-bit BTB")
    `CHECK_EQ(hit_type, BR_COND, "type kept")
    resolve(46'h2000, BR_JUMP, 1, 46'h2000 + 46'h10_0000);
    #1;
    `CHECK_EQ(hit_part, 2'd2, "moved to 23-bit BTB")
    `CHECK_EQ(hit_target, pc_t'(46'h2000 + 46'h10_0000), "new target")
    // not-taken does not allocate
    resolve(46'h3000, BR_COND, 0, 46'h3004);
    lookup_pc = 46'h3000; #1;
    `CHECK(!hit, "not-taken not allocated")
    // return
    resolve(46'h4000, BR_RET, 1, 46'h3FFF_FFFF_0000);
    lookup_pc = 46'h4000; #1;
    `CHECK(hit && hit_type == BR_RET && hit_part == 2'd0, "return in 8-bit BTB")
    // wrap-around: target below pc across the top of the address space
    resolve(46'h3FFF_FFFF_FFF0, BR_CALL, 1, 46'h20);
    lookup_pc = 46'h3FFF_FFFF_FFF0; #1;
    `CHECK_EQ(hit_target, pc_t'(46'h20), "wrap-around target")
    `CHECK_EQ(hit_part, 2'd0, "wrap-around offset is short")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench for fdipx_pf_filter: inserts 12 block addresses into the
// 10-entry table and checks which ones still hit (FIFO replacement drops the
// two oldest), that unrelated blocks miss, and that reset empties the table.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_pf_filter;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  blk_t lookup_blk, insert_blk;
  logic lookup_hit, insert_en;
  blk_t blks [12];

  always #5 clk = ~clk;

  fdipx_pf_filter dut (.*);

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    insert_en = 0; insert_blk = '0; lookup_blk = '0;
    for (int i = 0; i < 12; i++) blks[i] = blk_t'({$urandom, $urandom}) ^ blk_t'(i);
    repeat (2) @(posedge clk); rst_n = 1;
    lookup_blk = '0; #1;
    `CHECK(!lookup_hit, "empty after reset")
    for (int i = 0; i < 12; i++) begin
      @(negedge clk); insert_en = 1; insert_blk = blks[i];
      lookup_blk = blks[i]; #1;
      `CHECK(!lookup_hit, "not present before insert")
    end
    @(negedge clk); insert_en = 0;
    for (int i = 0; i < 12; i++) begin
      lookup_blk = blks[i]; #1;
      `CHECK_EQ(lookup_hit, (i >= 2), $sformatf("block %0d after 12 inserts", i))
    end
    lookup_blk = blks[5] + 1'b1; #1;
    `CHECK(!lookup_hit, "neighbour block misses")
    rst_n = 0; #1; rst_n = 1;
    lookup_blk = blks[11]; #1;
    `CHECK(!lookup_hit, "reset clears")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Testbench for fdipx_ftq with DEPTH = 4. Checks FIFO order at the head,
// push_ready dropping when full, the in-order prefetch-candidate scan that
// never offers the head, candidates skipped when the head passes them, and
// flush.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_ftq;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic flush, push_valid, push_ready, head_valid, pop, cand_valid, cand_ack, full;
  ftq_entry_t push_entry, head_entry, cand_entry;

  always #5 clk = ~clk;
  fdipx_ftq #(.DEPTH(4)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic ftq_entry_t E(int i);
    ftq_entry_t e; e.start = pc_t'(64'h100 * i); e.count = CNT_W'(1 + i % 4); return e;
  endfunction

  task automatic cyc(logic pu, int pi, logic po, logic ack);
    @(negedge clk); push_valid = pu; push_entry = E(pi); pop = po; cand_ack = ack && cand_valid;
    @(negedge clk); push_valid = 0; pop = 0; cand_ack = 0;
  endtask

  initial begin
    flush = 0; push_valid = 0; pop = 0; cand_ack = 0; push_entry = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    `CHECK(!head_valid && !cand_valid && push_ready, "empty")
    cyc(1, 0, 0, 0); #1;
    `CHECK(head_valid && head_entry == E(0), "head is first push")
    `CHECK(!cand_valid, "head is not a candidate")
    cyc(1, 1, 0, 0); #1;
    `CHECK(cand_valid && cand_entry == E(1), "second entry is candidate")
    cyc(1, 2, 0, 1); #1;  // ack E1
    `CHECK(cand_valid && cand_entry == E(2), "scan advances to E2")
    cyc(1, 3, 0, 0); #1;
    `CHECK(full && !push_ready, "full at 4")
    cyc(1, 9, 0, 0); #1;  // push refused
    `CHECK_EQ(head_entry, E(0), "head unchanged when push refused")
    cyc(0, 0, 1, 0); #1;  // pop E0 -> head E1 (scanned)
    `CHECK(head_entry == E(1) && cand_entry == E(2), "pop keeps scan position")
    cyc(0, 0, 1, 0); #1;  // pop E1 -> head E2 (not scanned): skipped
    `CHECK(head_entry == E(2) && cand_valid && cand_entry == E(3), "unscanned head skipped")
    cyc(1, 4, 1, 1); #1;  // push E4, pop E2, ack E3 simultaneously
    `CHECK(head_entry == E(3) && cand_valid && cand_entry == E(4), "simultaneous push/pop/ack")
    `CHECK(!full, "not full")
    @(negedge clk); flush = 1; @(negedge clk); flush = 0; #1;
    `CHECK(!head_valid && !cand_valid, "flush empties")
    cyc(1, 5, 0, 0); #1;
    `CHECK(head_entry == E(5) && !cand_valid, "restart after flush")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

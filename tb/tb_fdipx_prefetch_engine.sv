// Testbench for fdipx_prefetch_engine. The testbench plays the FTQ and the
// L1-I. Checks, cycle by cycle: a probe miss raises a prefetch request for
// the candidate's block and acknowledges only once the request is accepted;
// a probe hit drops the candidate; a probe that is not granted (demand busy)
// waits; a block prefetched before is filtered without probing; and the
// filter keeps the last 10 distinct prefetched blocks.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_prefetch_engine;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cand_valid, cand_ack, probe_valid, probe_grant, probe_hit, pf_req_valid, pf_req_ready;
  ftq_entry_t cand_entry;
  blk_t probe_blk, pf_req_blk;
  logic ev_filtered, ev_probe_hit, ev_issued;

  always #5 clk = ~clk;
  fdipx_prefetch_engine dut (.*);

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic ftq_entry_t C(pc_t pc);
    ftq_entry_t e; e.start = pc; e.count = 3; return e;
  endfunction

  // drive one cycle and check the engine's combinational response
  task automatic step(pc_t pc, logic grant, logic hit, logic rdy,
                      logic exp_probe, logic exp_req, logic exp_ack, string what);
    @(negedge clk);
    cand_valid = 1; cand_entry = C(pc);
    probe_grant = grant && probe_valid; probe_hit = hit && probe_grant; pf_req_ready = rdy; #1;
    probe_grant = grant && probe_valid; probe_hit = hit && probe_grant; #1;
    `CHECK_EQ(probe_valid, exp_probe, {what, ": probe"})
    `CHECK_EQ(pf_req_valid, exp_req, {what, ": request"})
    `CHECK_EQ(cand_ack, exp_ack, {what, ": ack"})
    if (exp_probe) `CHECK_EQ(probe_blk, blk_of(pc), {what, ": probe block"})
    if (exp_req)   `CHECK_EQ(pf_req_blk, blk_of(pc), {what, ": request block"})
  endtask

  initial begin
    cand_valid = 0; cand_entry = '0; probe_grant = 0; probe_hit = 0; pf_req_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); #1;
    `CHECK(!probe_valid && !pf_req_valid && !cand_ack, "idle without candidate")
    step(46'h1003, 0, 0, 1, 1, 0, 0, "probe not granted: wait");
    step(46'h1003, 1, 0, 0, 1, 1, 0, "probe miss, request not accepted");
    step(46'h1003, 1, 0, 1, 1, 1, 1, "probe miss, request accepted");
    step(46'h100C, 1, 0, 1, 0, 0, 1, "same block again: filtered");
    step(46'h2000, 1, 1, 1, 1, 0, 1, "probe hit: dropped");
    step(46'h2000, 1, 1, 1, 1, 0, 1, "probe hit is not recorded in filter");
    // fill the filter with 10 more blocks; 46'h1003's block is pushed out
    for (int i = 0; i < 10; i++) step(pc_t'(46'h10000 + 64'(i) * 16), 1, 0, 1, 1, 1, 1, "fill filter");
    step(46'h1000, 1, 0, 1, 1, 1, 1, "oldest block left the filter");
    step(46'h10000 + 16, 1, 0, 1, 0, 0, 1, "recent block still filtered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

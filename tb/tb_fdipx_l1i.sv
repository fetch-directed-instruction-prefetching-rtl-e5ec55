// Testbench for fdipx_l1i with 4 sets x 2 ways. Checks: misses after reset;
// fill then demand hit with the right line; probe granted only without a
// demand lookup; demand miss wins the request channel over a prefetch; a
// duplicate fill is dropped; round-robin eviction in a full set.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_l1i;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic dmd_valid, dmd_hit, probe_valid, probe_grant, probe_hit;
  logic miss_valid, miss_ready, pf_req_valid, pf_req_ready;
  logic llc_req_valid, llc_req_prefetch, llc_req_ready, fill_valid;
  blk_t dmd_blk, probe_blk, miss_blk, pf_req_blk, llc_req_blk, fill_blk;
  logic [LINE_BITS-1:0] dmd_line, fill_data;

  always #5 clk = ~clk;
  fdipx_l1i #(.SETS(4), .WAYS(2)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [LINE_BITS-1:0] line_of(blk_t b);
    logic [LINE_BITS-1:0] l;
    for (int i = 0; i < LINE_WORDS; i++) l[i*32 +: 32] = 32'(b) * 32'h9E37 + 32'(i);
    return l;
  endfunction

  task automatic fill(blk_t b, logic [LINE_BITS-1:0] d);
    @(negedge clk); fill_valid = 1; fill_blk = b; fill_data = d;
    @(negedge clk); fill_valid = 0;
  endtask
  task automatic demand(blk_t b, logic exp_hit, string what);
    dmd_valid = 1; dmd_blk = b; #1;
    `CHECK_EQ(dmd_hit, exp_hit, what)
    if (exp_hit) `CHECK_EQ(dmd_line, line_of(b), {what, " data"})
    dmd_valid = 0;
  endtask

  initial begin
    {dmd_valid, probe_valid, miss_valid, pf_req_valid, fill_valid} = '0;
    dmd_blk = '0; probe_blk = '0; miss_blk = '0; pf_req_blk = '0; fill_blk = '0; fill_data = '0;
    llc_req_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    demand(42'h10, 0, "miss after reset");
    fill(42'h10, line_of(42'h10));
    demand(42'h10, 1, "hit after fill");
    // probe vs demand
    probe_valid = 1; probe_blk = 42'h10; #1;
    `CHECK(probe_grant && probe_hit, "probe granted and hits when no demand")
    dmd_valid = 1; dmd_blk = 42'h20; #1;
    `CHECK(!probe_grant && !probe_hit, "demand blocks probe")
    dmd_valid = 0; probe_blk = 42'h24; #1;
    `CHECK(probe_grant && !probe_hit, "probe miss")
    probe_valid = 0;
    // arbitration
    miss_valid = 1; miss_blk = 42'h31; pf_req_valid = 1; pf_req_blk = 42'h32; #1;
    `CHECK(llc_req_valid && llc_req_blk == 42'h31 && !llc_req_prefetch && miss_ready && !pf_req_ready,
           "demand miss wins request channel")
    miss_valid = 0; #1;
    `CHECK(llc_req_valid && llc_req_blk == 42'h32 && llc_req_prefetch && pf_req_ready, "prefetch sent when alone")
    llc_req_ready = 0; #1;
    `CHECK(!pf_req_ready, "backpressure")
    pf_req_valid = 0; llc_req_ready = 1;
    // set 0 gets 42'h10 (already), fill 42'h14 (set 0), dup fill of 42'h10 dropped
    fill(42'h14, line_of(42'h14));
    fill(42'h10, '1);
    demand(42'h10, 1, "duplicate fill dropped");
    demand(42'h14, 1, "second way");
    fill(42'h18, line_of(42'h18));   // evicts way 0 (42'h10)
    demand(42'h10, 0, "round robin evicts way 0");
    demand(42'h14, 1, "way 1 kept");
    demand(42'h18, 1, "new line");
    fill(42'h1C, line_of(42'h1C));   // evicts way 1 (42'h14)
    demand(42'h14, 0, "round robin evicts way 1 next");
    demand(42'h18, 1, "way 0 kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

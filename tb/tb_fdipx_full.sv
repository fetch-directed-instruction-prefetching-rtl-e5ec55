// Full-size testbench: fdipx_top with every parameter at its default (the
// paper's 11.5 KB partitioned BTB, 10-entry prefetch filter; 16-entry FTQ,
// 32 KB L1-I). The core model runs the synthetic program of fdipx_tb_pkg
// for TARGET instructions. At this size the program fits in the L1-I, so
// misses are cold misses only, and prefetches cover them once the BTB knows
// the branches.
//
// Checks: the program retires with every fetched word correct; all four BTB
// partitions supply predictions; returns come from the return address
// stack; prefetches are issued and filtered (at this size the FTQ seldom
// holds entries behind the head, so probes rarely happen); demand misses occur only for
// the program's cold lines (at most one per line, 20 lines); the front end
// learns the program.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_full;
  import fdipx_pkg::*;
  localparam int FW = 4;   // must match the top's default FETCH_WIDTH
  localparam longint TARGET = 20000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;

  logic redirect_valid, out_valid, out_ready, llc_req_valid, llc_req_prefetch, llc_req_ready, fill_valid;
  pc_t redirect_pc, out_pc;
  br_update_t upd;
  logic [CNT_W-1:0] out_count;
  logic [INSTR_W-1:0] out_instr [FW];
  blk_t llc_req_blk, fill_blk;
  logic [LINE_BITS-1:0] fill_data;
  logic ev_btb_hit, ev_ftq_stall, ev_pf_filtered, ev_pf_probe_hit, ev_pf_issued, ev_probe_blocked, ev_dmd_miss;
  logic [1:0] ev_btb_part;

  always #5 clk = ~clk;

  fdipx_top dut (.*);

  fdipx_llc_model #(.LAT(20)) u_llc (
    .clk, .rst_n, .req_valid(llc_req_valid), .req_blk(llc_req_blk), .req_prefetch(llc_req_prefetch),
    .req_ready(llc_req_ready), .fill_valid, .fill_blk, .fill_data);

  fdipx_core_model #(.FETCH_WIDTH(FW)) u_core (
    .clk, .rst_n, .out_valid, .out_ready, .out_pc, .out_count, .out_instr,
    .redirect_valid, .redirect_pc, .upd);

  longint n_part [4] = '{0, 0, 0, 0};
  longint n_stall = 0, n_filt = 0, n_phit = 0, n_issued = 0, n_blocked = 0, n_miss = 0, cycles = 0;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (ev_btb_hit) n_part[ev_btb_part]++;
    n_stall   += ev_ftq_stall;
    n_filt    += ev_pf_filtered;
    n_phit    += ev_pf_probe_hit;
    n_issued  += ev_pf_issued;
    n_blocked += ev_probe_blocked;
    n_miss    += ev_dmd_miss;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: retired %0d", u_core.retired);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (u_core.retired >= TARGET);
    @(posedge clk);
    $display("cycles=%0d retired=%0d bundles=%0d redirects=%0d", cycles, u_core.retired, u_core.bundles, u_core.redirects);
    $display("btb hits per partition: %0d %0d %0d %0d", n_part[0], n_part[1], n_part[2], n_part[3]);
    $display("ftq stalls=%0d pf issued=%0d filtered=%0d probe hits=%0d probes blocked=%0d demand misses=%0d",
             n_stall, n_issued, n_filt, n_phit, n_blocked, n_miss);
    $display("returns predicted=%0d taken predicted=%0d", u_core.ras_ok, u_core.taken_ok);
    `CHECK(u_core.retired >= TARGET, "program retired")
    `CHECK_EQ(u_core.bad_words, 0, "every fetched word correct")
    for (int p = 0; p < 4; p++) `CHECK(n_part[p] > 0, $sformatf("BTB partition %0d used", p))
    `CHECK(n_issued > 0,  "prefetches issued")
    `CHECK(n_filt > 0,    "prefetches filtered")
    `CHECK(n_miss > 0 && n_miss <= 20, "demand misses only on cold lines")
    `CHECK(u_core.ras_ok > 0, "returns predicted through the RAS")
    `CHECK(u_core.redirects * 20 < u_core.retired, "front end learned the program")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

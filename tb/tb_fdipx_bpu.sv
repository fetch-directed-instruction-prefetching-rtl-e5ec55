// Testbench for fdipx_bpu (default BTB, fetch width 4). The testbench takes
// the FTQ's place and compares the pushed fetch blocks with sequences worked
// out by hand: sequential blocks split at cache-line ends, a taken jump, a
// call and the return predicted from the return address stack, a
// conditional branch followed while the predictor says taken and fallen
// through after it is trained not-taken, and no address generated while the
// FTQ is full. Rate: one instruction address per cycle.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_bpu;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic redirect_valid, ftq_push_valid, ftq_push_ready, ev_btb_hit, ev_ftq_stall;
  logic [1:0] ev_btb_part;
  pc_t redirect_pc;
  br_update_t upd;
  ftq_entry_t ftq_push_entry;

  always #5 clk = ~clk;
  fdipx_bpu dut (.*);

  ftq_entry_t got [$];
  longint     got_cyc [$];
  longint     cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && ftq_push_valid && ftq_push_ready) begin
      got.push_back(ftq_push_entry);
      got_cyc.push_back(cyc);
    end
  end

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic resolve(pc_t pc, br_type_e t, logic tk, pc_t tgt);
    @(negedge clk); upd.valid = 1; upd.pc = pc; upd.btype = t; upd.taken = tk; upd.target = tgt;
    @(negedge clk); upd.valid = 0;
  endtask
  task automatic restart(pc_t pc);
    @(negedge clk); ftq_push_ready = 0; redirect_valid = 1; redirect_pc = pc;
    @(negedge clk); redirect_valid = 0; got.delete(); got_cyc.delete(); ftq_push_ready = 1;
  endtask
  task automatic expect_blocks(pc_t s [], int n [], string what);
    wait (got.size() >= s.size());
    foreach (s[i]) begin
      `CHECK_EQ(got[i].start, s[i], $sformatf("%s: block %0d start", what, i))
      `CHECK_EQ(int'(got[i].count), n[i], $sformatf("%s: block %0d count", what, i))
    end
  endtask

  initial begin
    redirect_valid = 0; redirect_pc = '0; upd = '0; ftq_push_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    expect_blocks('{46'h0, 46'h4, 46'h8, 46'hC, 46'h10}, '{4, 4, 4, 4, 4}, "sequential");
    // one BTB lookup per cycle: a 4-instruction block every 4 cycles
    for (int i = 1; i < 5; i++) `CHECK_EQ(got_cyc[i] - got_cyc[i-1], longint'(4), "one instruction per cycle")
    restart(46'hE);
    expect_blocks('{46'hE, 46'h10}, '{2, 4}, "line end closes block");
    // taken jump at 0x22 -> 0x105
    resolve(46'h22, BR_JUMP, 1, 46'h105);
    restart(46'h20);
    expect_blocks('{46'h20, 46'h105, 46'h109}, '{3, 4, 4}, "jump");
    // call at 0x301 -> 0x5000, return at 0x5002
    resolve(46'h301, BR_CALL, 1, 46'h5000);
    resolve(46'h5002, BR_RET, 1, 46'h302);
    restart(46'h300);
    expect_blocks('{46'h300, 46'h5000, 46'h302, 46'h306}, '{2, 3, 4, 4}, "call/return");
    // far call in the 46-bit partition, return through the RAS
    resolve(46'h601, BR_CALL, 1, 46'h2A00_0000_0000);
    resolve(46'h2A00_0000_0000, BR_RET, 1, 46'h602);
    restart(46'h600);
    expect_blocks('{46'h600, 46'h2A00_0000_0000, 46'h602}, '{2, 1, 4}, "far call/return");
    // conditional loop branch at 0x402 -> 0x400, taken while weakly taken
    resolve(46'h402, BR_COND, 1, 46'h400);
    restart(46'h400);
    expect_blocks('{46'h400, 46'h400, 46'h400}, '{3, 3, 3}, "conditional taken");
    resolve(46'h402, BR_COND, 0, 46'h400);
    resolve(46'h402, BR_COND, 0, 46'h400);
    resolve(46'h402, BR_COND, 0, 46'h400);
    restart(46'h400);
    expect_blocks('{46'h400, 46'h404}, '{4, 4}, "conditional trained not-taken");
    // FTQ full: nothing generated, then the stream continues where it stopped
    restart(46'h800);
    wait (got.size() >= 1);
    @(negedge clk); ftq_push_ready = 0;
    begin
      int n0; n0 = got.size();
      repeat (10) @(negedge clk);
      `CHECK_EQ(got.size(), n0, "no push while FTQ full")
      `CHECK(ev_ftq_stall, "stall reported")
      ftq_push_ready = 1;
      wait (got.size() >= 4);
      foreach (got[i]) `CHECK_EQ(got[i].start, pc_t'(46'h800 + 4 * i), "continues after stall")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

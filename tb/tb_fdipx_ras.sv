// Testbench for fdipx_ras: pushes and pops against a queue reference model,
// including simultaneous push+pop and overflow of a 4-entry stack (the
// oldest entries are overwritten, so only the newest 4 come back).
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_ras;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic push, pop; pc_t push_addr, top;
  pc_t model [$];

  always #5 clk = ~clk;
  fdipx_ras #(.DEPTH(4)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic do_push(pc_t a);
    @(negedge clk); push = 1; pop = 0; push_addr = a;
    @(negedge clk); push = 0;
    model.push_back(a); if (model.size() > 4) void'(model.pop_front());
    `CHECK_EQ(top, model[$], "top after push")
  endtask
  task automatic do_pop();
    @(negedge clk);
    `CHECK_EQ(top, model[$], "top before pop")
    push = 0; pop = 1;
    @(negedge clk); pop = 0;
    void'(model.pop_back());
  endtask

  initial begin
    push = 0; pop = 0; push_addr = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    do_push(46'h100); do_push(46'h200); do_push(46'h300);
    do_pop(); do_pop();
    `CHECK_EQ(top, pc_t'(46'h100), "LIFO order")
    // push and pop together replace the top
    @(negedge clk); push = 1; pop = 1; push_addr = 46'h777;
    @(negedge clk); push = 0; pop = 0;
    `CHECK_EQ(top, pc_t'(46'h777), "push+pop replaces top")
    model[$] = 46'h777;
    // overflow
    for (int i = 0; i < 6; i++) do_push(pc_t'(46'h1000 + i));
    for (int i = 0; i < 4; i++) do_pop();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

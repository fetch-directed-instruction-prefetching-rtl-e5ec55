// Testbench for fdipx_bimodal: trains random outcomes into a 16-entry table
// and compares every prediction with a saturating-counter reference model;
// also checks the weakly-taken reset state and index aliasing.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_bimodal;
  import fdipx_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  pc_t pc, upd_pc; logic taken, upd_en, upd_taken;
  int ctr [16];

  always #5 clk = ~clk;
  fdipx_bimodal #(.ENTRIES(16)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    upd_en = 0; upd_pc = '0; upd_taken = 0; pc = '0;
    for (int i = 0; i < 16; i++) ctr[i] = 2;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      pc = pc_t'(i); #1;
      `CHECK(taken, "weakly taken after reset")
    end
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      upd_en = ($urandom % 4) != 0;
      upd_pc = pc_t'({$urandom, $urandom});
      upd_taken = ($urandom % 3) != 0;
      pc = pc_t'({$urandom, $urandom}); #1;
      `CHECK_EQ(taken, ctr[pc[3:0]] >= 2, "prediction")
      if (upd_en) begin
        if (upd_taken && ctr[upd_pc[3:0]] < 3) ctr[upd_pc[3:0]]++;
        if (!upd_taken && ctr[upd_pc[3:0]] > 0) ctr[upd_pc[3:0]]--;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

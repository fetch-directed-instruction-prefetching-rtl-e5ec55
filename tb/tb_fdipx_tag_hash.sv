// Testbench for fdipx_tag_hash. Checks the folded-XOR compression for the
// 39-bit tag of a 128-set BTB and the 42-bit tag of a 16-set BTB against a
// reference written out block by block, on directed and random tags.
`timescale 1ns/1ps
`include "tb/tb_common.svh"
module tb_fdipx_tag_hash;
  int checks = 0, failures = 0;
  logic [38:0] t39; logic [15:0] h39;
  logic [41:0] t42; logic [15:0] h42;

  fdipx_tag_hash #(.FULL_W(39)) dut39 (.full_tag(t39), .hashed_tag(h39));
  fdipx_tag_hash #(.FULL_W(42)) dut42 (.full_tag(t42), .hashed_tag(h42));

  function automatic logic [15:0] ref39(logic [38:0] t);
    logic [7:0] hi;
    hi = t[15:8] ^ t[23:16] ^ t[31:24] ^ {1'b0, t[38:32]};
    return {hi, t[7:0]};
  endfunction
  function automatic logic [15:0] ref42(logic [41:0] t);
    logic [7:0] hi;
    hi = t[15:8] ^ t[23:16] ^ t[31:24] ^ t[39:32] ^ {6'b0, t[41:40]};
    return {hi, t[7:0]};
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    t39 = '0; t42 = '0; #1;
    `CHECK_EQ(h39, 16'h0000, "zero tag")
    t39 = 39'h1 << 32; #1;
    `CHECK_EQ(h39, 16'h0100, "bit 32 folds to bit 8")
    t39 = 39'h1 << 38; #1;
    `CHECK_EQ(h39, 16'h4000, "bit 38 folds to bit 14")
    t39 = 39'hFF; #1;
    `CHECK_EQ(h39, 16'h00FF, "low byte kept")
    t39 = 39'h00_0000_FF00 | (39'hFF << 16); #1;
    `CHECK_EQ(h39, 16'h0000, "equal blocks cancel")
    for (int i = 0; i < 500; i++) begin
      t39 = {$urandom, $urandom}; t42 = {$urandom, $urandom}; #1;
      `CHECK_EQ(h39, ref39(t39), "random 39-bit tag")
      `CHECK_EQ(h42, ref42(t42), "random 42-bit tag")
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

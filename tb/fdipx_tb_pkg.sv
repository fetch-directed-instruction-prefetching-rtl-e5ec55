// fdipx_tb_pkg: the synthetic program used by the end-to-end testbenches.
//
// Memory contents: the instruction word at word address pc is word_of(pc),
// a fixed function of the address, so any fetched word can be checked.
//
// Control flow (word addresses):
//   main  0x100: call f1 at 0x104, call f3 at 0x10A, call f2 at 0x110,
//                conditional branch back to 0x100 at 0x118 (taken on 7 of
//                every 8 iterations), jump back to 0x100 at 0x119.
//   f1  0xC0100: inner loop, conditional branch 0xC0108 -> 0xC0102 taken 3
//                of every 4 times, return at 0xC0110.
//   f2  0x2_0000_0000: 200 straight-line instructions, return at +0xC7.
//   f3  0x900:   return at 0x905.
// The call offsets need 23, 13 and 46-bit fields and the loop branches 8
// bits, so all four BTB partitions are used. f2 is 13 cache lines long so a
// small L1-I thrashes and depends on prefetching.
package fdipx_tb_pkg;
  import fdipx_pkg::*;

  localparam pc_t MAIN = 46'h100;
  localparam pc_t F1   = 46'hC0100;
  localparam pc_t F2   = 46'h2_0000_0000;
  localparam pc_t F3   = 46'h900;

  function automatic logic [31:0] word_of(pc_t pc);
    return 32'(pc) ^ 32'(pc >> 32) ^ 32'hC0DE_5EED;
  endfunction

  function automatic logic [LINE_BITS-1:0] line_of(blk_t b);
    logic [LINE_BITS-1:0] l;
    for (int i = 0; i < LINE_WORDS; i++) l[i*32 +: 32] = word_of({b, LOFF_W'(i)});
    return l;
  endfunction

  // Static description of the branch at pc, if any.
  function automatic logic is_branch(pc_t pc, output br_type_e t, output pc_t tgt);
    t = BR_COND; tgt = '0;
    case (pc)
      MAIN + 46'h04: begin t = BR_CALL; tgt = F1;   end
      MAIN + 46'h0A: begin t = BR_CALL; tgt = F3;   end
      MAIN + 46'h10: begin t = BR_CALL; tgt = F2;   end
      MAIN + 46'h18: begin t = BR_COND; tgt = MAIN; end
      MAIN + 46'h19: begin t = BR_JUMP; tgt = MAIN; end
      F1 + 46'h08:   begin t = BR_COND; tgt = F1 + 46'h02; end
      F1 + 46'h10:   begin t = BR_RET;  end
      F2 + 46'hC7:   begin t = BR_RET;  end
      F3 + 46'h05:   begin t = BR_RET;  end
      default: return 1'b0;
    endcase
    return 1'b1;
  endfunction
endpackage

// fdipx_btb: the FDIP-X partitioned branch target buffer.
//
// One logical BTB built from four physically separate partitions that differ
// only in the width of their target-offset field: 8, 13, 23 and 46 bits. All
// four are looked up in parallel with the same address; the result is the
// hit, the branch type, the predicted target (pc + sign-extended offset) and
// which partition supplied it.
//
// Allocation: a branch that the core resolves as taken is written into the
// smallest partition whose field can hold its target offset (two's
// complement, in instructions, the field including the direction bit). It is
// invalidated in the other three partitions in the same cycle, so one branch
// lives in one partition even if its target changes. The 46-bit field spans
// the whole 46-bit word address space, so every branch fits somewhere.
// Returns are stored with offset 0; their target comes from the return
// address stack. Not-taken resolutions do not allocate.
//
// Sizes (defaults) are the paper's smallest storage budget, 11.5 KB: three
// partitions of 128 sets x 6 ways (768 entries each) and a 46-bit partition
// of 112 entries, organised here as 16 sets x 7 ways (the paper gives only
// the entry count). Timing: combinational lookup, update at the clock edge.
module fdipx_btb
  import fdipx_pkg::*;
#(
  parameter int SETS     = 128,
  parameter int WAYS     = 6,
  parameter int BIG_SETS = 16,
  parameter int BIG_WAYS = 7,
  parameter int OFF_W0   = 8,
  parameter int OFF_W1   = 13,
  parameter int OFF_W2   = 23,
  parameter int OFF_W3   = 46
) (
  input  logic       clk,
  input  logic       rst_n,
  input  pc_t        lookup_pc,
  output logic       hit,
  output br_type_e   hit_type,
  output pc_t        hit_target,
  output logic [1:0] hit_part,
  input  br_update_t upd
);
  typedef logic signed [PC_W-1:0] soff_t;

  // Does offset `off` fit a w-bit two's complement field?
  function automatic logic fits(soff_t off, int w);
    soff_t lo, hi;
    if (w >= PC_W) return 1'b1;
    hi = (soff_t'(1) <<< (w - 1)) - 1;
    lo = -(soff_t'(1) <<< (w - 1));
    return (off >= lo) && (off <= hi);
  endfunction

  // ---- allocation decision ----
  soff_t      upd_off;
  logic [1:0] upd_part;
  logic       do_alloc;

  always_comb begin
    upd_off  = (upd.btype == BR_RET) ? '0 : soff_t'(upd.target - upd.pc);
    if      (fits(upd_off, OFF_W0)) upd_part = 2'd0;
    else if (fits(upd_off, OFF_W1)) upd_part = 2'd1;
    else if (fits(upd_off, OFF_W2)) upd_part = 2'd2;
    else                            upd_part = 2'd3;
    do_alloc = upd.valid && upd.taken;
  end

  logic       p_hit  [4];
  br_type_e   p_type [4];
  soff_t      p_off  [4];

  logic [OFF_W0-1:0] off0;
  logic [OFF_W1-1:0] off1;
  logic [OFF_W2-1:0] off2;
  logic [OFF_W3-1:0] off3;

  fdipx_btb_part #(.OFF_W(OFF_W0), .SETS(SETS), .WAYS(WAYS)) u_p0 (
    .clk, .rst_n, .lookup_pc, .hit(p_hit[0]), .hit_type(p_type[0]), .hit_off(off0),
    .wr_en(do_alloc && upd_part == 2'd0), .wr_pc(upd.pc), .wr_type(upd.btype), .wr_off(OFF_W0'(upd_off)),
    .inv_en(do_alloc && upd_part != 2'd0), .inv_pc(upd.pc));
  fdipx_btb_part #(.OFF_W(OFF_W1), .SETS(SETS), .WAYS(WAYS)) u_p1 (
    .clk, .rst_n, .lookup_pc, .hit(p_hit[1]), .hit_type(p_type[1]), .hit_off(off1),
    .wr_en(do_alloc && upd_part == 2'd1), .wr_pc(upd.pc), .wr_type(upd.btype), .wr_off(OFF_W1'(upd_off)),
    .inv_en(do_alloc && upd_part != 2'd1), .inv_pc(upd.pc));
  fdipx_btb_part #(.OFF_W(OFF_W2), .SETS(SETS), .WAYS(WAYS)) u_p2 (
    .clk, .rst_n, .lookup_pc, .hit(p_hit[2]), .hit_type(p_type[2]), .hit_off(off2),
    .wr_en(do_alloc && upd_part == 2'd2), .wr_pc(upd.pc), .wr_type(upd.btype), .wr_off(OFF_W2'(upd_off)),
    .inv_en(do_alloc && upd_part != 2'd2), .inv_pc(upd.pc));
  fdipx_btb_part #(.OFF_W(OFF_W3), .SETS(BIG_SETS), .WAYS(BIG_WAYS)) u_p3 (
    .clk, .rst_n, .lookup_pc, .hit(p_hit[3]), .hit_type(p_type[3]), .hit_off(off3),
    .wr_en(do_alloc && upd_part == 2'd3), .wr_pc(upd.pc), .wr_type(upd.btype), .wr_off(OFF_W3'(upd_off)),
    .inv_en(do_alloc && upd_part != 2'd3), .inv_pc(upd.pc));

  // sign-extend each partition's offset to the full word-address width
  assign p_off[0] = soff_t'($signed(off0));
  assign p_off[1] = soff_t'($signed(off1));
  assign p_off[2] = soff_t'($signed(off2));
  assign p_off[3] = soff_t'($signed(off3));

  // ---- merge: the smallest partition that hits wins ----
  always_comb begin
    hit        = 1'b0;
    hit_type   = BR_COND;
    hit_target = '0;
    hit_part   = '0;
    for (int p = 3; p >= 0; p--) begin
      if (p_hit[p]) begin
        hit        = 1'b1;
        hit_type   = p_type[p];
        hit_target = lookup_pc + pc_t'(p_off[p]);
        hit_part   = 2'(p);
      end
    end
  end
endmodule

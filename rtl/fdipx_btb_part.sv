// fdipx_btb_part: one partition of the FDIP-X branch target buffer.
//
// An instruction-based, set-associative BTB. Each entry holds a valid bit, a
// 16-bit compressed tag, the 2-bit branch type and a signed target offset of
// OFF_W bits, counted in instructions (target = pc + offset). There is no
// basic-block size field. The set index is the low log2(SETS) bits of the
// instruction's word address; the rest of the address is the full tag, which
// fdipx_tag_hash compresses to 16 bits.
//
// Timing: lookup is combinational on lookup_pc. A write (wr_en) or an
// invalidate (inv_en) takes effect at the next rising clock edge. A write to
// a branch already present updates its entry in place; otherwise it fills an
// invalid way, or the way named by the set's round-robin pointer.
//
// From the paper: entry fields and widths (16-bit tag, 2-bit type, 8/13/23/46
// bit offset), 128 sets and 6 ways. This design's choices: the valid bit,
// round-robin replacement, combinational lookup.
module fdipx_btb_part
  import fdipx_pkg::*;
#(
  parameter int OFF_W = 8,
  parameter int SETS  = 128,
  parameter int WAYS  = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  pc_t              lookup_pc,
  output logic             hit,
  output br_type_e         hit_type,
  output logic [OFF_W-1:0] hit_off,
  // install / update
  input  logic             wr_en,
  input  pc_t              wr_pc,
  input  br_type_e         wr_type,
  input  logic [OFF_W-1:0] wr_off,
  // invalidate
  input  logic             inv_en,
  input  pc_t              inv_pc
);
  localparam int IDX_W  = $clog2(SETS);
  localparam int FTAG_W = PC_W - IDX_W;
  localparam int WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [HTAG_W-1:0] htag_t;

  logic [SETS-1:0][WAYS-1:0]  valid_q;  // flat: reset is one register
  logic [SETS-1:0][WAY_W-1:0] rr_q;
  htag_t             tag_q   [SETS][WAYS];
  br_type_e          type_q  [SETS][WAYS];
  logic [OFF_W-1:0]  off_q   [SETS][WAYS];

  // ---- address split and tag hashing for the three access ports ----
  logic [IDX_W-1:0] l_idx, w_idx, i_idx;
  htag_t            l_tag, w_tag, i_tag;

  assign l_idx = lookup_pc[IDX_W-1:0];
  assign w_idx = wr_pc[IDX_W-1:0];
  assign i_idx = inv_pc[IDX_W-1:0];

  fdipx_tag_hash #(.FULL_W(FTAG_W), .HASH_W(HTAG_W)) u_hash_l (.full_tag(lookup_pc[PC_W-1:IDX_W]), .hashed_tag(l_tag));
  fdipx_tag_hash #(.FULL_W(FTAG_W), .HASH_W(HTAG_W)) u_hash_w (.full_tag(wr_pc[PC_W-1:IDX_W]),     .hashed_tag(w_tag));
  fdipx_tag_hash #(.FULL_W(FTAG_W), .HASH_W(HTAG_W)) u_hash_i (.full_tag(inv_pc[PC_W-1:IDX_W]),    .hashed_tag(i_tag));

  // ---- lookup ----
  always_comb begin
    hit      = 1'b0;
    hit_type = BR_COND;
    hit_off  = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[l_idx][w] && tag_q[l_idx][w] == l_tag) begin
        hit      = 1'b1;
        hit_type = type_q[l_idx][w];
        hit_off  = off_q[l_idx][w];
      end
    end
  end

  // ---- way selection for a write ----
  logic             w_match, w_free;
  logic [WAY_W-1:0] w_match_way, w_free_way, w_way;

  always_comb begin
    w_match = 1'b0; w_match_way = '0;
    w_free  = 1'b0; w_free_way  = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[w_idx][w] && tag_q[w_idx][w] == w_tag) begin
        w_match = 1'b1; w_match_way = WAY_W'(w);
      end
      if (!valid_q[w_idx][w]) begin
        w_free = 1'b1; w_free_way = WAY_W'(w);
      end
    end
    w_way = w_match ? w_match_way : (w_free ? w_free_way : rr_q[w_idx]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rr_q    <= '0;
    end else begin
      if (inv_en) begin
        for (int w = 0; w < WAYS; w++)
          if (tag_q[i_idx][w] == i_tag) valid_q[i_idx][w] <= 1'b0;
      end
      if (wr_en) begin
        valid_q[w_idx][w_way] <= 1'b1;
        if (!w_match && !w_free)
          rr_q[w_idx] <= (rr_q[w_idx] == WAY_W'(WAYS - 1)) ? '0 : rr_q[w_idx] + 1'b1;
      end
    end
  end

  // Payload arrays carry no reset; they are only read behind a valid bit.
  always_ff @(posedge clk) begin
    if (wr_en) begin
      tag_q [w_idx][w_way] <= w_tag;
      type_q[w_idx][w_way] <= wr_type;
      off_q [w_idx][w_way] <= wr_off;
    end
  end
endmodule

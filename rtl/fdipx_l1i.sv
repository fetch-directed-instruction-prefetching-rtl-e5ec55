// fdipx_l1i: L1 instruction cache with a demand port and a probe port.
//
// A set-associative cache of SETS x WAYS lines of 64 bytes, indexed by the
// low bits of the block address and tagged with the remaining bits. It has:
//   * a demand port (fetch unit): combinational hit and full line data;
//   * a probe port (prefetch engine): combinational hit only. The tag array
//     serves one lookup per cycle and demand comes first, so a probe is
//     granted only in a cycle without a demand lookup;
//   * a request channel to the next level (LLC): demand misses from the
//     fetch unit and prefetch requests from the prefetch engine share it, a
//     demand miss winning over a prefetch in the same cycle. llc_req_prefetch
//     tells which one was sent;
//   * a fill port: a returned line is installed at the clock edge in an
//     invalid way, else in the set's round-robin victim; a fill for a block
//     that is already present is dropped.
//
// From the paper: the L1-I is probed by prefetches, misses go to the next
// level, and demand fetches are served before prefetch probes. This
// design's choices: capacity (32 KB, 8-way, 64-byte lines, not given by the
// paper), round-robin replacement and single-cycle lookups.
module fdipx_l1i
  import fdipx_pkg::*;
#(
  parameter int SETS = 64,
  parameter int WAYS = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // demand lookup
  input  logic                 dmd_valid,
  input  blk_t                 dmd_blk,
  output logic                 dmd_hit,
  output logic [LINE_BITS-1:0] dmd_line,
  // prefetch probe
  input  logic                 probe_valid,
  input  blk_t                 probe_blk,
  output logic                 probe_grant,
  output logic                 probe_hit,
  // demand miss request (fetch unit)
  input  logic                 miss_valid,
  input  blk_t                 miss_blk,
  output logic                 miss_ready,
  // prefetch request (prefetch engine)
  input  logic                 pf_req_valid,
  input  blk_t                 pf_req_blk,
  output logic                 pf_req_ready,
  // to the next level
  output logic                 llc_req_valid,
  output blk_t                 llc_req_blk,
  output logic                 llc_req_prefetch,
  input  logic                 llc_req_ready,
  // fill from the next level
  input  logic                 fill_valid,
  input  blk_t                 fill_blk,
  input  logic [LINE_BITS-1:0] fill_data
);
  localparam int IDX_W = $clog2(SETS);
  localparam int TAG_W = BLK_W - IDX_W;
  localparam int WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [TAG_W-1:0] tag_t;

  logic [SETS-1:0][WAYS-1:0]  valid_q;  // flat: reset is one register
  logic [SETS-1:0][WAY_W-1:0] rr_q;
  tag_t                 tag_q   [SETS][WAYS];
  logic [LINE_BITS-1:0] data_q  [SETS][WAYS];

  // ---- one shared tag lookup: demand first, then probe ----
  blk_t             l_blk;
  logic [IDX_W-1:0] l_idx;
  tag_t             l_tag;
  logic             l_hit;
  logic [WAY_W-1:0] l_way;

  assign l_blk = dmd_valid ? dmd_blk : probe_blk;
  assign l_idx = l_blk[IDX_W-1:0];
  assign l_tag = l_blk[BLK_W-1:IDX_W];

  always_comb begin
    l_hit = 1'b0;
    l_way = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (valid_q[l_idx][w] && tag_q[l_idx][w] == l_tag) begin
        l_hit = 1'b1;
        l_way = WAY_W'(w);
      end
  end

  assign dmd_hit     = dmd_valid && l_hit;
  assign dmd_line    = data_q[l_idx][l_way];
  assign probe_grant = probe_valid && !dmd_valid;
  assign probe_hit   = probe_grant && l_hit;

  // ---- request arbitration towards the next level ----
  assign llc_req_valid    = miss_valid || pf_req_valid;
  assign llc_req_blk      = miss_valid ? miss_blk : pf_req_blk;
  assign llc_req_prefetch = !miss_valid;
  assign miss_ready       = llc_req_ready;
  assign pf_req_ready     = llc_req_ready && !miss_valid;

  // ---- fill ----
  logic [IDX_W-1:0] f_idx;
  tag_t             f_tag;
  logic             f_present, f_free;
  logic [WAY_W-1:0] f_free_way, f_way;

  assign f_idx = fill_blk[IDX_W-1:0];
  assign f_tag = fill_blk[BLK_W-1:IDX_W];

  always_comb begin
    f_present  = 1'b0;
    f_free     = 1'b0;
    f_free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[f_idx][w] && tag_q[f_idx][w] == f_tag) f_present = 1'b1;
      if (!valid_q[f_idx][w]) begin
        f_free     = 1'b1;
        f_free_way = WAY_W'(w);
      end
    end
    f_way = f_free ? f_free_way : rr_q[f_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rr_q    <= '0;
    end else if (fill_valid && !f_present) begin
      valid_q[f_idx][f_way] <= 1'b1;
      if (!f_free)
        rr_q[f_idx] <= (rr_q[f_idx] == WAY_W'(WAYS - 1)) ? '0 : rr_q[f_idx] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid && !f_present) begin
      tag_q [f_idx][f_way] <= f_tag;
      data_q[f_idx][f_way] <= fill_data;
    end
  end
endmodule

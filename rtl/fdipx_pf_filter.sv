// fdipx_pf_filter: recent-prefetch filter (prefetch throttling).
//
// A fully-associative table of the block addresses of the last ENTRIES
// prefetches issued. A prefetch candidate whose block is in the table is
// suppressed, so the same block is not requested again while it is likely
// still in flight or freshly filled. Lookup is combinational; an insert takes
// effect at the clock edge and overwrites the oldest entry (FIFO order).
//
// From the paper: the 10-entry fully-associative table of recently issued
// prefetches and its use as a filter. This design's choice: FIFO replacement.
module fdipx_pf_filter
  import fdipx_pkg::*;
#(
  parameter int ENTRIES = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  blk_t lookup_blk,
  output logic lookup_hit,
  input  logic insert_en,
  input  blk_t insert_blk
);
  localparam int PTR_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic             valid_q [ENTRIES];
  blk_t             blk_q   [ENTRIES];
  logic [PTR_W-1:0] wr_q;

  always_comb begin
    lookup_hit = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      if (valid_q[i] && blk_q[i] == lookup_blk) lookup_hit = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_q <= '0;
      for (int i = 0; i < ENTRIES; i++) valid_q[i] <= 1'b0;
    end else if (insert_en) begin
      valid_q[wr_q] <= 1'b1;
      wr_q <= (wr_q == PTR_W'(ENTRIES - 1)) ? '0 : wr_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (insert_en) blk_q[wr_q] <= insert_blk;
  end
endmodule

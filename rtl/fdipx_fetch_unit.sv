// fdipx_fetch_unit: instruction fetch engine.
//
// Consumes the head of the FTQ, the fetch point. While the output register
// is free (or being emptied) the unit looks up the head block's cache line on
// the L1-I demand port. On a hit the FTQ entry is popped and its
// instructions (up to FETCH_WIDTH, all in one line) are loaded into the
// output register, presented to the core one cycle later with a valid /
// ready handshake. On a miss the unit raises one demand miss request towards
// the next level and then leaves the L1-I alone, so that prefetch probes can
// use it, until it sees the fill of its block on the fill bus; it looks the
// line up again in the next cycle (and asks again should the line have been
// evicted meanwhile). A flush (redirect) clears the output register and the
// pending-miss state; a fill still in flight is installed normally.
//
// From the paper: the fetch engine consumes the FTQ head and demand-fetches
// it from the L1-I. This design's choices: the registered output, the
// bundle format and one outstanding demand miss.
module fdipx_fetch_unit
  import fdipx_pkg::*;
#(
  parameter int FETCH_WIDTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 flush,
  // FTQ head
  input  logic                 head_valid,
  input  ftq_entry_t           head_entry,
  output logic                 pop,
  // L1-I demand port
  output logic                 dmd_valid,
  output blk_t                 dmd_blk,
  input  logic                 dmd_hit,
  input  logic [LINE_BITS-1:0] dmd_line,
  // demand miss request, and the fill bus it waits on
  output logic                 miss_valid,
  output blk_t                 miss_blk,
  input  logic                 miss_ready,
  input  logic                 fill_valid,
  input  blk_t                 fill_blk,
  // fetch bundle to the core
  output logic                 out_valid,
  input  logic                 out_ready,
  output pc_t                  out_pc,
  output logic [CNT_W-1:0]     out_count,
  output logic [INSTR_W-1:0]   out_instr [FETCH_WIDTH],
  // events
  output logic                 ev_dmd_miss
);
  logic can_load, req_sent_q;

  assign can_load   = !out_valid || out_ready;
  assign dmd_valid  = head_valid && can_load && !flush && !req_sent_q;
  assign dmd_blk    = blk_of(head_entry.start);
  assign pop        = dmd_valid && dmd_hit;
  assign miss_valid = dmd_valid && !dmd_hit && !req_sent_q;
  assign miss_blk   = dmd_blk;
  assign ev_dmd_miss = miss_valid && miss_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      req_sent_q <= 1'b0;
    end else if (flush) begin
      out_valid  <= 1'b0;
      req_sent_q <= 1'b0;
    end else begin
      if (pop)               out_valid <= 1'b1;
      else if (out_ready)    out_valid <= 1'b0;
      if (req_sent_q && fill_valid && fill_blk == dmd_blk) req_sent_q <= 1'b0;
      else if (ev_dmd_miss)                               req_sent_q <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (pop) begin
      out_pc    <= head_entry.start;
      out_count <= head_entry.count;
      for (int k = 0; k < FETCH_WIDTH; k++) begin
        int w;
        w = int'(head_entry.start[LOFF_W-1:0]) + k;
        out_instr[k] <= (k < int'(head_entry.count) && w < LINE_WORDS)
                        ? dmd_line[w*INSTR_W +: INSTR_W] : '0;
      end
    end
  end

`ifndef SYNTHESIS
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || flush)
                                 out_valid && !out_ready |=> out_valid && $stable(out_pc))
    else $error("fetch bundle changed while stalled");
`endif
endmodule

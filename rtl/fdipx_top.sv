// fdipx_top: the FDIP-X instruction-fetch front end.
//
// Wiring (fetch-directed prefetching): the branch prediction unit runs ahead
// of fetch and fills the fetch target queue with predicted fetch blocks. The
// fetch unit consumes the queue head and demand-fetches it from the L1-I.
// The prefetch engine scans the entries behind the head, filters blocks it
// prefetched recently, probes the L1-I when no demand fetch needs it, and
// sends a prefetch request for every probe miss. Demand misses and
// prefetches leave on one request channel to the next cache level (LLC);
// lines come back on the fill port.
//
// Outside this module: the LLC (llc_req_* / fill_*) and the core back end,
// which receives the fetch bundles (out_*), returns resolved branches (upd)
// and redirects the front end after a misprediction (redirect_*). A redirect
// is a one-cycle pulse: it restarts the BPU at redirect_pc, empties the FTQ
// and drops the fetch bundle in the output register, all at the next edge.
//
// The ev_* outputs are one-cycle event pulses for performance counting.
// Default sizes: the BTB of the paper's 11.5 KB budget (3 x 768 entries +
// 112), a 10-entry prefetch filter (both from the paper); FTQ depth 16,
// fetch width 4, a 32 KB 8-way L1-I, a 4096-entry bimodal predictor and a
// 16-entry return address stack (this design's choices).
module fdipx_top
  import fdipx_pkg::*;
#(
  parameter int FETCH_WIDTH    = 4,
  parameter int FTQ_DEPTH      = 16,
  parameter int BTB_SETS       = 128,
  parameter int BTB_WAYS       = 6,
  parameter int BIG_SETS       = 16,
  parameter int BIG_WAYS       = 7,
  parameter int BP_ENTRIES     = 4096,
  parameter int RAS_DEPTH      = 16,
  parameter int FILTER_ENTRIES = 10,
  parameter int L1I_SETS       = 64,
  parameter int L1I_WAYS       = 8,
  parameter pc_t RESET_PC      = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // core back end
  input  logic                 redirect_valid,
  input  pc_t                  redirect_pc,
  input  br_update_t           upd,
  output logic                 out_valid,
  input  logic                 out_ready,
  output pc_t                  out_pc,
  output logic [CNT_W-1:0]     out_count,
  output logic [INSTR_W-1:0]   out_instr [FETCH_WIDTH],
  // next cache level
  output logic                 llc_req_valid,
  output blk_t                 llc_req_blk,
  output logic                 llc_req_prefetch,
  input  logic                 llc_req_ready,
  input  logic                 fill_valid,
  input  blk_t                 fill_blk,
  input  logic [LINE_BITS-1:0] fill_data,
  // event pulses
  output logic                 ev_btb_hit,
  output logic [1:0]           ev_btb_part,
  output logic                 ev_ftq_stall,
  output logic                 ev_pf_filtered,
  output logic                 ev_pf_probe_hit,
  output logic                 ev_pf_issued,
  output logic                 ev_probe_blocked,
  output logic                 ev_dmd_miss
);
  // BPU -> FTQ
  logic       push_valid, push_ready;
  ftq_entry_t push_entry;
  // FTQ -> fetch unit
  logic       head_valid, pop;
  ftq_entry_t head_entry;
  // FTQ -> prefetch engine
  logic       cand_valid, cand_ack;
  ftq_entry_t cand_entry;
  logic       ftq_full;
  // L1-I ports
  logic                 dmd_valid, dmd_hit;
  blk_t                 dmd_blk;
  logic [LINE_BITS-1:0] dmd_line;
  logic                 probe_valid, probe_grant, probe_hit;
  blk_t                 probe_blk;
  logic                 miss_valid, miss_ready;
  blk_t                 miss_blk;
  logic                 pf_req_valid, pf_req_ready;
  blk_t                 pf_req_blk;

  fdipx_bpu #(
    .FETCH_WIDTH(FETCH_WIDTH), .BTB_SETS(BTB_SETS), .BTB_WAYS(BTB_WAYS),
    .BIG_SETS(BIG_SETS), .BIG_WAYS(BIG_WAYS), .BP_ENTRIES(BP_ENTRIES),
    .RAS_DEPTH(RAS_DEPTH), .RESET_PC(RESET_PC)
  ) u_bpu (
    .clk, .rst_n, .redirect_valid, .redirect_pc, .upd,
    .ftq_push_valid(push_valid), .ftq_push_ready(push_ready), .ftq_push_entry(push_entry),
    .ev_btb_hit, .ev_btb_part, .ev_ftq_stall);

  fdipx_ftq #(.DEPTH(FTQ_DEPTH)) u_ftq (
    .clk, .rst_n, .flush(redirect_valid),
    .push_valid, .push_ready, .push_entry,
    .head_valid, .head_entry, .pop,
    .cand_valid, .cand_entry, .cand_ack, .full(ftq_full));

  fdipx_fetch_unit #(.FETCH_WIDTH(FETCH_WIDTH)) u_fetch (
    .clk, .rst_n, .flush(redirect_valid),
    .head_valid, .head_entry, .pop,
    .dmd_valid, .dmd_blk, .dmd_hit, .dmd_line,
    .miss_valid, .miss_blk, .miss_ready, .fill_valid, .fill_blk,
    .out_valid, .out_ready, .out_pc, .out_count, .out_instr,
    .ev_dmd_miss);

  fdipx_prefetch_engine #(.FILTER_ENTRIES(FILTER_ENTRIES)) u_pf (
    .clk, .rst_n,
    .cand_valid(cand_valid && !redirect_valid), .cand_entry, .cand_ack,
    .probe_valid, .probe_blk, .probe_grant, .probe_hit,
    .pf_req_valid, .pf_req_blk, .pf_req_ready,
    .ev_filtered(ev_pf_filtered), .ev_probe_hit(ev_pf_probe_hit), .ev_issued(ev_pf_issued));

  fdipx_l1i #(.SETS(L1I_SETS), .WAYS(L1I_WAYS)) u_l1i (
    .clk, .rst_n,
    .dmd_valid, .dmd_blk, .dmd_hit, .dmd_line,
    .probe_valid, .probe_blk, .probe_grant, .probe_hit,
    .miss_valid, .miss_blk, .miss_ready,
    .pf_req_valid, .pf_req_blk, .pf_req_ready,
    .llc_req_valid, .llc_req_blk, .llc_req_prefetch, .llc_req_ready,
    .fill_valid, .fill_blk, .fill_data);

  assign ev_probe_blocked = probe_valid && !probe_grant;

`ifndef SYNTHESIS
  // address generation stops exactly when the FTQ is full
  a_stall_iff_full: assert property (@(posedge clk) disable iff (!rst_n)
                                     ev_ftq_stall == (ftq_full && !redirect_valid))
    else $error("BPU stall does not match FTQ occupancy");
`endif
endmodule

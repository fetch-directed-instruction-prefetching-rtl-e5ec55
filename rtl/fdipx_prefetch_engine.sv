// fdipx_prefetch_engine: turns FTQ entries into L1-I prefetches.
//
// The engine takes the prefetch candidate offered by the FTQ (a non-head
// entry) and handles it in a single cycle:
//   1. its cache block is looked up in the recent-prefetch filter; on a hit
//      the candidate is dropped (throttled);
//   2. otherwise the L1-I is probed. The L1-I grants the probe only when no
//      demand fetch uses it in that cycle; without the grant the candidate
//      waits. A probe hit drops the candidate (block already present);
//   3. on a probe miss a prefetch request is raised, and when the L1-I
//      accepts it the block is recorded in the filter.
// The candidate is acknowledged to the FTQ once it has been dropped or its
// prefetch accepted. All of this is combinational within the cycle; the
// filter insert takes effect at the clock edge.
//
// From the paper: the prefetch probe, the prefetch request on a probe miss,
// the filter of recently issued prefetches and demand priority in the L1-I.
// This design's choice: one candidate per cycle, same-cycle handling.
module fdipx_prefetch_engine
  import fdipx_pkg::*;
#(
  parameter int FILTER_ENTRIES = 10
) (
  input  logic       clk,
  input  logic       rst_n,
  // FTQ candidate
  input  logic       cand_valid,
  input  ftq_entry_t cand_entry,
  output logic       cand_ack,
  // L1-I probe port
  output logic       probe_valid,
  output blk_t       probe_blk,
  input  logic       probe_grant,
  input  logic       probe_hit,
  // prefetch request
  output logic       pf_req_valid,
  output blk_t       pf_req_blk,
  input  logic       pf_req_ready,
  // events
  output logic       ev_filtered,
  output logic       ev_probe_hit,
  output logic       ev_issued
);
  blk_t blk;
  logic filt_hit;

  assign blk = blk_of(cand_entry.start);

  fdipx_pf_filter #(.ENTRIES(FILTER_ENTRIES)) u_filter (
    .clk, .rst_n, .lookup_blk(blk), .lookup_hit(filt_hit),
    .insert_en(ev_issued), .insert_blk(blk));

  always_comb begin
    probe_valid  = cand_valid && !filt_hit;
    probe_blk    = blk;
    pf_req_valid = probe_valid && probe_grant && !probe_hit;
    pf_req_blk   = blk;

    ev_filtered  = cand_valid && filt_hit;
    ev_probe_hit = probe_valid && probe_grant && probe_hit;
    ev_issued    = pf_req_valid && pf_req_ready;
    cand_ack     = ev_filtered || ev_probe_hit || ev_issued;
  end
endmodule

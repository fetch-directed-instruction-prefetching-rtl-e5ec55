// fdipx_ftq: fetch target queue.
//
// A circular FIFO of DEPTH fetch blocks that decouples the branch prediction
// unit (producer) from the fetch unit (consumer). The head entry is the
// fetch point. The entries behind the head are prefetch candidates: a scan
// pointer, kept as a distance from the head that is always at least 1,
// offers them to the prefetch engine one at a time, in order (cand_valid /
// cand_entry / cand_ack). Each entry is offered at most once; one that
// reaches the head before it was scanned is no longer a candidate.
//
// Push, pop and candidate acknowledge may all happen in one cycle and take
// effect at the clock edge. push_ready is low when the queue is full, which
// stops address generation. flush (on a redirect) empties the queue.
//
// From the paper: the FTQ's role, the head as fetch point, the non-head
// entries as prefetch candidates, and the full-queue throttle. This design's
// choices: DEPTH = 16 and the in-order scan pointer.
module fdipx_ftq
  import fdipx_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       flush,
  // producer
  input  logic       push_valid,
  output logic       push_ready,
  input  ftq_entry_t push_entry,
  // fetch unit
  output logic       head_valid,
  output ftq_entry_t head_entry,
  input  logic       pop,
  // prefetch engine
  output logic       cand_valid,
  output ftq_entry_t cand_entry,
  input  logic       cand_ack,
  // occupancy
  output logic       full
);
  localparam int PTR_W = $clog2(DEPTH);
  localparam int OCC_W = $clog2(DEPTH + 1);

  ftq_entry_t       mem_q [DEPTH];
  logic [PTR_W-1:0] head_q, tail_q;
  logic [OCC_W-1:0] count_q, scan_q;

  function automatic logic [PTR_W-1:0] wrap_add(logic [PTR_W-1:0] a, logic [OCC_W-1:0] b);
    int s;
    s = int'(a) + int'(b);
    if (s >= DEPTH) s -= DEPTH;
    return PTR_W'(s);
  endfunction

  logic do_push, do_pop, do_ack;

  assign full       = (count_q == OCC_W'(DEPTH));
  assign push_ready = !full;
  assign head_valid = (count_q != '0);
  assign head_entry = mem_q[head_q];
  assign cand_valid = (scan_q < count_q);
  assign cand_entry = mem_q[wrap_add(head_q, scan_q)];

  assign do_push = push_valid && push_ready;
  assign do_pop  = pop && head_valid;
  assign do_ack  = cand_ack && cand_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
      scan_q  <= OCC_W'(1);
    end else if (flush) begin
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
      scan_q  <= OCC_W'(1);
    end else begin
      if (do_push) tail_q <= wrap_add(tail_q, OCC_W'(1));
      if (do_pop)  head_q <= wrap_add(head_q, OCC_W'(1));
      count_q <= count_q + OCC_W'(do_push) - OCC_W'(do_pop);
      begin
        logic [OCC_W:0] s;
        s = {1'b0, scan_q} + (OCC_W+1)'(do_ack) - (OCC_W+1)'(do_pop);
        scan_q <= (s == '0) ? OCC_W'(1) : OCC_W'(s);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (do_push && !flush) mem_q[tail_q] <= push_entry;
  end

`ifndef SYNTHESIS
  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> head_valid)
    else $error("FTQ pop while empty");
  a_ack_valid: assert property (@(posedge clk) disable iff (!rst_n) cand_ack |-> cand_valid)
    else $error("FTQ candidate acknowledged while none offered");
`endif
endmodule

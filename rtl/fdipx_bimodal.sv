// fdipx_bimodal: conditional-branch direction predictor.
//
// A table of ENTRIES 2-bit saturating counters indexed by the low bits of the
// instruction's word address. A counter of 2 or 3 predicts taken. Counters
// reset to 2 (weakly taken), so a conditional branch that has just been
// allocated in the BTB (which happens when it is first taken) is predicted
// taken. Training with the resolved direction happens at the clock edge.
//
// The paper's branch prediction unit contains "the branch predictor" but does
// not say which; the bimodal table, its size and its reset value are this
// design's choice. Lookup is combinational.
module fdipx_bimodal
  import fdipx_pkg::*;
#(
  parameter int ENTRIES = 4096
) (
  input  logic clk,
  input  logic rst_n,
  input  pc_t  pc,
  output logic taken,
  input  logic upd_en,
  input  pc_t  upd_pc,
  input  logic upd_taken
);
  localparam int IDX_W = $clog2(ENTRIES);

  // The counter table is a plain memory without reset; a per-entry
  // "written" bit (one flat register, cleared by reset) makes an entry that
  // was never trained read as the reset value 2.
  logic [1:0]         ctr_q [ENTRIES];
  logic [ENTRIES-1:0] written_q;
  logic [IDX_W-1:0]   l_idx, u_idx;
  logic [1:0]         l_ctr, u_ctr, u_next;

  assign l_idx = pc[IDX_W-1:0];
  assign u_idx = upd_pc[IDX_W-1:0];
  assign l_ctr = written_q[l_idx] ? ctr_q[l_idx] : 2'd2;
  assign u_ctr = written_q[u_idx] ? ctr_q[u_idx] : 2'd2;
  assign taken = l_ctr[1];

  always_comb begin
    u_next = u_ctr;
    if (upd_taken && u_ctr != 2'd3)       u_next = u_ctr + 2'd1;
    else if (!upd_taken && u_ctr != 2'd0) u_next = u_ctr - 2'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      written_q <= '0;
    else if (upd_en) written_q[u_idx] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (upd_en) ctr_q[u_idx] <= u_next;
  end
endmodule

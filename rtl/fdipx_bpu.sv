// fdipx_bpu: branch prediction unit (address generation) of FDIP-X.
//
// Every cycle in which the fetch target queue (FTQ) can accept an entry, the
// unit looks up one instruction address, pc, in the partitioned BTB. A BTB
// hit identifies a branch: calls, returns and jumps are always taken, a
// conditional branch is taken when the bimodal predictor says so. A taken
// branch sends pc to its target (for a return, the top of the return address
// stack); otherwise, or on a BTB miss, pc advances to the next instruction.
//
// Consecutive addresses are gathered into fetch blocks: a block ends at a
// predicted-taken branch, at the last instruction of a cache line, or when it
// holds FETCH_WIDTH instructions. The completed block {start, count} is
// pushed into the FTQ in the cycle its last instruction is looked up. While
// the FTQ is full no address is generated, which throttles run-ahead.
//
// A redirect from the core (misprediction) restarts generation at
// redirect_pc next cycle and drops the partly built block. Resolved branches
// arriving on `upd` train the BTB (taken ones) and the direction predictor
// (conditional ones).
//
// From the paper: BTB + branch predictor + return address stack, decoupling
// through the FTQ, a conventional (instruction-based) BTB, sequential
// generation on a BTB miss, and the stall on a full FTQ. This design's
// choices: one lookup per cycle, the fetch-block format, FETCH_WIDTH = 4.
module fdipx_bpu
  import fdipx_pkg::*;
#(
  parameter int  FETCH_WIDTH = 4,
  parameter int  BTB_SETS    = 128,
  parameter int  BTB_WAYS    = 6,
  parameter int  BIG_SETS    = 16,
  parameter int  BIG_WAYS    = 7,
  parameter int  BP_ENTRIES  = 4096,
  parameter int  RAS_DEPTH   = 16,
  parameter pc_t RESET_PC    = '0
) (
  input  logic       clk,
  input  logic       rst_n,
  // from the core
  input  logic       redirect_valid,
  input  pc_t        redirect_pc,
  input  br_update_t upd,
  // to the FTQ
  output logic       ftq_push_valid,
  input  logic       ftq_push_ready,
  output ftq_entry_t ftq_push_entry,
  // events, one-cycle pulses
  output logic       ev_btb_hit,
  output logic [1:0] ev_btb_part,
  output logic       ev_ftq_stall
);
  pc_t              pc_q, start_q;
  logic [CNT_W-1:0] cnt_q;

  logic       btb_hit, bp_taken;
  br_type_e   btb_type;
  pc_t        btb_target, ras_top;
  logic [1:0] btb_part;

  fdipx_btb #(.SETS(BTB_SETS), .WAYS(BTB_WAYS), .BIG_SETS(BIG_SETS), .BIG_WAYS(BIG_WAYS)) u_btb (
    .clk, .rst_n, .lookup_pc(pc_q), .hit(btb_hit), .hit_type(btb_type),
    .hit_target(btb_target), .hit_part(btb_part), .upd);

  fdipx_bimodal #(.ENTRIES(BP_ENTRIES)) u_bp (
    .clk, .rst_n, .pc(pc_q), .taken(bp_taken),
    .upd_en(upd.valid && upd.btype == BR_COND), .upd_pc(upd.pc), .upd_taken(upd.taken));

  logic advance, taken, close;
  pc_t  next_pc, blk_start;
  logic [CNT_W-1:0] n;

  fdipx_ras #(.DEPTH(RAS_DEPTH)) u_ras (
    .clk, .rst_n,
    .push(advance && btb_hit && btb_type == BR_CALL), .push_addr(pc_q + 1'b1),
    .pop (advance && btb_hit && btb_type == BR_RET),  .top(ras_top));

  always_comb begin
    advance   = ftq_push_ready && !redirect_valid;
    taken     = btb_hit && (btb_type != BR_COND || bp_taken);
    next_pc   = !taken ? pc_q + 1'b1 : (btb_type == BR_RET ? ras_top : btb_target);
    n         = cnt_q + 1'b1;
    close     = taken || (&pc_q[LOFF_W-1:0]) || (n == CNT_W'(FETCH_WIDTH));
    blk_start = (cnt_q == '0) ? pc_q : start_q;

    ftq_push_valid       = advance && close;
    ftq_push_entry.start = blk_start;
    ftq_push_entry.count = n;

    ev_btb_hit   = advance && btb_hit;
    ev_btb_part  = btb_part;
    ev_ftq_stall = !ftq_push_ready && !redirect_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_q    <= RESET_PC;
      start_q <= RESET_PC;
      cnt_q   <= '0;
    end else if (redirect_valid) begin
      pc_q  <= redirect_pc;
      cnt_q <= '0;
    end else if (advance) begin
      pc_q    <= next_pc;
      start_q <= blk_start;
      cnt_q   <= close ? '0 : n;
    end
  end
endmodule

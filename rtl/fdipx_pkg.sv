// fdipx_pkg: types and constants shared by the FDIP-X front end.
//
// Addresses: the front end works on 46-bit instruction (word) addresses,
// i.e. a 48-bit virtual address with the two always-zero low bits dropped,
// since every instruction is 32-bit aligned. A cache block of 64 bytes holds
// 16 instructions, so a block address is the word address without its low
// 4 bits. The 48-bit address space and word alignment follow the paper; the
// 64-byte line is this design's choice.
//
// Branch types use the 2-bit type field of every BTB entry. The field width
// is the paper's; the encoding below is this design's choice.
package fdipx_pkg;

  localparam int VA_W       = 48;             // virtual address bits
  localparam int PC_W       = VA_W - 2;       // word address bits
  localparam int LINE_BYTES = 64;
  localparam int LINE_WORDS = LINE_BYTES / 4; // instructions per line
  localparam int LOFF_W     = $clog2(LINE_WORDS);
  localparam int BLK_W      = PC_W - LOFF_W;  // block address bits
  localparam int LINE_BITS  = LINE_BYTES * 8;
  localparam int INSTR_W    = 32;
  localparam int TYPE_W     = 2;
  localparam int HTAG_W     = 16;             // compressed BTB tag
  localparam int CNT_W      = $clog2(LINE_WORDS + 1); // 1..LINE_WORDS

  typedef logic [PC_W-1:0]  pc_t;
  typedef logic [BLK_W-1:0] blk_t;

  typedef enum logic [TYPE_W-1:0] {
    BR_COND = 2'd0,  // conditional direct branch
    BR_JUMP = 2'd1,  // unconditional jump (direct or indirect)
    BR_CALL = 2'd2,  // call: pushes the return address
    BR_RET  = 2'd3   // return: target from the return address stack
  } br_type_e;

  // A fetch block: consecutive instructions inside one cache line.
  typedef struct packed {
    pc_t              start;
    logic [CNT_W-1:0] count;  // 1..FETCH_WIDTH
  } ftq_entry_t;

  // A branch resolved by the core, used to train the BTB and predictor.
  typedef struct packed {
    logic     valid;
    pc_t      pc;
    br_type_e btype;
    logic     taken;
    pc_t      target;
  } br_update_t;

  function automatic blk_t blk_of(pc_t pc);
    return pc[PC_W-1:LOFF_W];
  endfunction

endpackage

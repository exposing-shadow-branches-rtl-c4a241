// skia_pkg: types and constants shared by the shadow-branch front end.
//
// The front end predicts branches with a Branch Target Buffer (BTB) and, in
// parallel, with a Shadow Branch Buffer (SBB) that holds branches found by
// decoding the unused ("shadow") bytes of instruction cache lines. The SBB is
// split in two: the U-SBB holds direct unconditional jumps and calls with
// their targets, the R-SBB holds only the position of return instructions
// (their target comes from the return address stack).
//
// Following the paper: 64-byte cache lines, 64-bit addresses, 10-bit tags,
// 2-bit branch type in the BTB, 1-bit type and 1-bit "retired" flag in the SBB
// entries, 6-bit line offset in the R-SBB, x86 instructions of 1 to 15 bytes.
// This design's own choice: the encodings of the type enums below.
package skia_pkg;

  localparam int unsigned ADDR_W      = 64;  // virtual address / target width
  localparam int unsigned LINE_BYTES  = 64;  // L1-I line size
  localparam int unsigned OFF_W       = 6;   // byte offset within a line
  localparam int unsigned TAG_W       = 10;  // tag bits in BTB / SBB entries
  localparam int unsigned MAX_INSN    = 15;  // longest x86 instruction
  localparam int unsigned LEN_W       = 4;   // holds 0..15, 0 = not decodable

  typedef logic [ADDR_W-1:0]          addr_t;
  typedef logic [LINE_BYTES*8-1:0]    line_t;   // byte k is line[8*k +: 8]
  typedef logic [OFF_W-1:0]           off_t;
  typedef logic [LEN_W-1:0]           len_t;

  // What the shadow decoder's length decoder says about one instruction.
  typedef enum logic [2:0] {
    INSN_OTHER    = 3'd0,  // not a branch
    INSN_JMP_REL  = 3'd1,  // E9 rel32 / EB rel8: direct unconditional jump
    INSN_CALL_REL = 3'd2,  // E8 rel32: direct call
    INSN_RET      = 3'd3,  // C3 / C2 imm16: near return
    INSN_COND     = 3'd4,  // Jcc rel8/rel32, JrCXZ, LOOP: direct conditional
    INSN_INDIRECT = 3'd5   // FF /2, FF /3, FF /4, FF /5: indirect call / jump
  } insn_kind_e;

  // 2-bit branch type field of a BTB entry.
  typedef enum logic [1:0] {
    BR_COND   = 2'd0,
    BR_UNCOND = 2'd1,  // direct or indirect unconditional jump
    BR_CALL   = 2'd2,
    BR_RET    = 2'd3
  } br_type_e;

  // Which structure supplied a prediction.
  typedef enum logic [1:0] {
    SRC_NONE = 2'd0,
    SRC_BTB  = 2'd1,
    SRC_USBB = 2'd2,
    SRC_RSBB = 2'd3
  } pred_src_e;

  // One Fetch Target Queue entry: a predicted basic block.
  typedef struct packed {
    addr_t start_pc;  // entry point (target of the previous taken branch)
    addr_t exit_pc;   // address of the branch that ends the block
    logic  taken;     // block ends in a predicted-taken branch
    addr_t target;    // predicted target of that branch
  } ftq_entry_t;

  // A branch found by the shadow branch decoder, on its way into the SBB.
  typedef struct packed {
    logic  is_ret;    // 1: goes to the R-SBB, 0: goes to the U-SBB
    logic  is_call;   // U-SBB type bit: call (1) or jump (0)
    logic  ret_imm;   // R-SBB type bit: RET imm16 (1) or plain RET (0)
    logic  head;      // found in the head (1) or tail (0) shadow region
    addr_t pc;        // address of the branch
    addr_t target;    // direct target (U-SBB only)
  } sbb_fill_t;

  function automatic off_t line_off(addr_t a);
    return a[OFF_W-1:0];
  endfunction

  function automatic addr_t line_base(addr_t a);
    return {a[ADDR_W-1:OFF_W], {OFF_W{1'b0}}};
  endfunction

endpackage

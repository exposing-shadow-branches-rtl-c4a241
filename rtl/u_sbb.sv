// u_sbb: DirectUncond Shadow Branch Buffer.
//
// Holds direct unconditional jumps and direct calls found by the shadow
// branch decoder, with their targets, so that a branch that misses in the BTB
// can still be predicted. An entry is 10-bit tag, valid, LRU, 1-bit type
// (jump or call), retired bit and 64-bit target = 78 bits (paper). The paper's
// main configuration is 768 entries, 4-way (192 sets), 7.3125KB.
//
// Interface: lookup (combinational, same cycle) by branch address returns hit,
// call/jump type and target; fill from the shadow decoder; retire marks an
// entry whose prediction was committed, so that entries never used (possibly
// bogus branches from a wrong head decode) are the first to be evicted.
// Index and tag, this design's choice: set = pc mod SETS, tag = low 10 bits of
// pc div SETS (192 sets is not a power of two).
module u_sbb
  import skia_pkg::*;
#(
  parameter int unsigned ENTRIES = 768,
  parameter int unsigned WAYS    = 4,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lk_valid,
  input  addr_t lk_pc,
  output logic  lk_hit,
  output logic  lk_is_call,
  output addr_t lk_target,
  output logic  lk_retired,
  input  logic  fill_valid,
  input  addr_t fill_pc,
  input  logic  fill_is_call,
  input  addr_t fill_target,
  output logic  fill_evict,
  input  logic  rt_valid,
  input  addr_t rt_pc,
  output logic  rt_hit
);

  localparam int unsigned DATA_W = 1 + ADDR_W;

  function automatic logic [SET_W-1:0] set_of(addr_t pc);
    return SET_W'(pc % ADDR_W'(SETS));
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(addr_t pc);
    return TAG_W'(pc / ADDR_W'(SETS));
  endfunction

  logic [DATA_W-1:0] lk_data;
  logic [((WAYS > 1) ? $clog2(WAYS) : 1)-1:0] unused_way;

  sa_table #(.SETS(SETS), .WAYS(WAYS), .TAG_BITS(TAG_W), .DATA_W(DATA_W),
             .HAS_RETIRED(1'b1)) u_tab (
    .clk, .rst_n,
    .lk_valid, .lk_set(set_of(lk_pc)), .lk_tag(tag_of(lk_pc)),
    .lk_hit, .lk_way(unused_way), .lk_data, .lk_retired,
    .ins_valid(fill_valid), .ins_set(set_of(fill_pc)), .ins_tag(tag_of(fill_pc)),
    .ins_data({fill_is_call, fill_target}), .ins_evict(fill_evict),
    .rt_valid, .rt_set(set_of(rt_pc)), .rt_tag(tag_of(rt_pc)), .rt_hit
  );

  assign lk_is_call = lk_data[ADDR_W];
  assign lk_target  = lk_data[ADDR_W-1:0];

endmodule

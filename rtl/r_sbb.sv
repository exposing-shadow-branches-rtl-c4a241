// r_sbb: Return Shadow Branch Buffer.
//
// Holds the positions of return instructions found by the shadow branch
// decoder. A return's target comes from the return address stack, so an entry
// needs no target: 10-bit tag, valid, LRU, 1-bit type, retired bit and the
// 6-bit byte offset of the return in its 64-byte line = 20 bits (paper). The
// paper's main configuration is 2024 entries, 4-way (506 sets), 4.9375KB.
//
// The table is indexed by cache line: set = line mod SETS, and an entry
// matches when its 10-bit tag (low bits of line div SETS) and its 6-bit offset
// both equal those of the looked-up address, so several returns of one line
// live in different ways. Indexing by line and using the offset as part of the
// match is this design's reading of the entry format; the paper gives the
// fields, not their use. The type bit records RET imm16 (C2) versus RET (C3),
// also this design's choice. Lookup is combinational; fill and retire act at
// the next clock edge; retire protects committed entries from eviction.
module r_sbb
  import skia_pkg::*;
#(
  parameter int unsigned ENTRIES = 2024,
  parameter int unsigned WAYS    = 4,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  lk_valid,
  input  addr_t lk_pc,
  output logic  lk_hit,
  output logic  lk_ret_imm,
  output logic  lk_retired,
  input  logic  fill_valid,
  input  addr_t fill_pc,
  input  logic  fill_ret_imm,
  output logic  fill_evict,
  input  logic  rt_valid,
  input  addr_t rt_pc,
  output logic  rt_hit
);

  localparam int unsigned KEY_W = TAG_W + OFF_W;

  function automatic logic [SET_W-1:0] set_of(addr_t pc);
    return SET_W'((pc >> OFF_W) % ADDR_W'(SETS));
  endfunction
  function automatic logic [KEY_W-1:0] key_of(addr_t pc);
    return {TAG_W'((pc >> OFF_W) / ADDR_W'(SETS)), pc[OFF_W-1:0]};
  endfunction

  logic [0:0] lk_data;
  logic [((WAYS > 1) ? $clog2(WAYS) : 1)-1:0] unused_way;

  sa_table #(.SETS(SETS), .WAYS(WAYS), .TAG_BITS(KEY_W), .DATA_W(1),
             .HAS_RETIRED(1'b1)) u_tab (
    .clk, .rst_n,
    .lk_valid, .lk_set(set_of(lk_pc)), .lk_tag(key_of(lk_pc)),
    .lk_hit, .lk_way(unused_way), .lk_data, .lk_retired,
    .ins_valid(fill_valid), .ins_set(set_of(fill_pc)), .ins_tag(key_of(fill_pc)),
    .ins_data(fill_ret_imm), .ins_evict(fill_evict),
    .rt_valid, .rt_set(set_of(rt_pc)), .rt_tag(key_of(rt_pc)), .rt_hit
  );

  assign lk_ret_imm = lk_data[0];

endmodule

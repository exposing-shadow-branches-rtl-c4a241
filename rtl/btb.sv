// btb: Branch Target Buffer of the decoupled front end.
//
// Looked up with the address of a branch; a hit returns the branch's 2-bit
// type (conditional, unconditional, call, return) and its 64-bit target. It is
// filled by the core's main decoder / back end when a branch is seen. An
// entry is 10-bit tag, valid, LRU, 2-bit type and 64-bit target = 78 bits,
// as in the paper; 8K entries, 4-way (2048 sets) gives the paper's 78KB.
//
// Index and tag, this design's choice: set = pc mod SETS, tag = the low 10
// bits of pc div SETS. Lookup is combinational (same cycle); an update is
// written at the next clock edge. Replacement is the shared one-bit-per-way
// LRU of sa_table; the BTB has no retired bit.
module btb
  import skia_pkg::*;
#(
  parameter int unsigned ENTRIES = 8192,
  parameter int unsigned WAYS    = 4,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     lk_valid,
  input  addr_t    lk_pc,
  output logic     lk_hit,
  output br_type_e lk_type,
  output addr_t    lk_target,
  input  logic     upd_valid,
  input  addr_t    upd_pc,
  input  br_type_e upd_type,
  input  addr_t    upd_target
);

  localparam int unsigned DATA_W = 2 + ADDR_W;

  function automatic logic [SET_W-1:0] set_of(addr_t pc);
    return SET_W'(pc % ADDR_W'(SETS));
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(addr_t pc);
    return TAG_W'(pc / ADDR_W'(SETS));
  endfunction

  logic [DATA_W-1:0] lk_data;
  logic              unused_evict, unused_rt_hit, unused_ret;
  logic [((WAYS > 1) ? $clog2(WAYS) : 1)-1:0] unused_way;

  sa_table #(.SETS(SETS), .WAYS(WAYS), .TAG_BITS(TAG_W), .DATA_W(DATA_W),
             .HAS_RETIRED(1'b0)) u_tab (
    .clk, .rst_n,
    .lk_valid, .lk_set(set_of(lk_pc)), .lk_tag(tag_of(lk_pc)),
    .lk_hit, .lk_way(unused_way), .lk_data, .lk_retired(unused_ret),
    .ins_valid(upd_valid), .ins_set(set_of(upd_pc)), .ins_tag(tag_of(upd_pc)),
    .ins_data({upd_type, upd_target}), .ins_evict(unused_evict),
    .rt_valid(1'b0), .rt_set('0), .rt_tag('0), .rt_hit(unused_rt_hit)
  );

  assign lk_type   = br_type_e'(lk_data[ADDR_W +: 2]);
  assign lk_target = lk_data[ADDR_W-1:0];

endmodule

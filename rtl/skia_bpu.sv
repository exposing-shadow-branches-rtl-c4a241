// skia_bpu: target prediction of the branch prediction unit with the SBB.
//
// The BTB and the two Shadow Branch Buffers are looked up in parallel with
// the same branch address. The BTB has priority; only on a BTB miss does the
// SBB supply a prediction: a U-SBB hit gives a direct jump or call with its
// stored target, an R-SBB hit gives a return whose target is the top of the
// return address stack. This is the paper's "BTB hit/miss" multiplexer. Fills
// from the shadow branch decoder go to the U-SBB (jumps, calls) or the R-SBB
// (returns); the core's decoder fills the BTB; a committed branch whose
// prediction came from an SBB sets that entry's retired bit.
//
// The return address stack is kept here: a predicted call pushes pc + 5 and a
// predicted return pops. Pushing pc + 5 is this design's choice (the paper
// does not say how the RAS is updated): it is exact for the E8 rel32 calls
// the shadow decoder finds, and assumes a 5-byte call for calls from the BTB,
// whose entries hold no instruction length. An R-SBB hit with an empty RAS
// gives no prediction.
//
// The fill's `head` flag (head or tail shadow) is not used here: both kinds
// of fill are stored alike; it only feeds the top's event counters.
//
// Timing: the prediction (pred_*) is combinational from lk_pc in the same
// cycle; RAS, BTB, SBB and retired-bit updates take effect at the next edge.
module skia_bpu
  import skia_pkg::*;
#(
  parameter int unsigned BTB_ENTRIES  = 8192,
  parameter int unsigned BTB_WAYS     = 4,
  parameter int unsigned USBB_ENTRIES = 768,
  parameter int unsigned USBB_WAYS    = 4,
  parameter int unsigned RSBB_ENTRIES = 2024,
  parameter int unsigned RSBB_WAYS    = 4,
  parameter int unsigned RAS_DEPTH    = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // lookup
  input  logic      lk_valid,
  input  addr_t     lk_pc,
  output logic      pred_hit,
  output pred_src_e pred_src,
  output br_type_e  pred_type,
  output addr_t     pred_target,
  output logic      pred_retired,  // SBB entry that predicted has its retired bit
  output logic      pred_ret_imm,  // R-SBB entry is a "ret imm16" (C2)
  // BTB update from the core's decoder
  input  logic      btb_upd_valid,
  input  addr_t     btb_upd_pc,
  input  br_type_e  btb_upd_type,
  input  addr_t     btb_upd_target,
  // SBB fill from the shadow branch decoder
  input  logic      fill_valid,
  input  sbb_fill_t fill,          // .head unused here (see above)
  // commit of a branch predicted by an SBB
  input  logic      rt_valid,
  input  addr_t     rt_pc,
  input  pred_src_e rt_src,
  // events
  output logic      usbb_evict,
  output logic      rsbb_evict,
  output logic      retire_hit,
  output logic      ras_overflow
);

  localparam addr_t CALL_LEN = 64'd5;

  logic     btb_hit;
  br_type_e btb_type;
  addr_t    btb_target;
  logic     u_hit, u_is_call, u_retired;
  addr_t    u_target;
  logic     r_hit, r_ret_imm, r_retired;
  logic     ras_valid;
  addr_t    ras_top;
  logic     u_rt_hit, r_rt_hit;

  btb #(.ENTRIES(BTB_ENTRIES), .WAYS(BTB_WAYS)) u_btb (
    .clk, .rst_n,
    .lk_valid, .lk_pc, .lk_hit(btb_hit), .lk_type(btb_type), .lk_target(btb_target),
    .upd_valid(btb_upd_valid), .upd_pc(btb_upd_pc), .upd_type(btb_upd_type),
    .upd_target(btb_upd_target)
  );

  u_sbb #(.ENTRIES(USBB_ENTRIES), .WAYS(USBB_WAYS)) u_usbb (
    .clk, .rst_n,
    .lk_valid(lk_valid && !btb_hit), .lk_pc,
    .lk_hit(u_hit), .lk_is_call(u_is_call), .lk_target(u_target), .lk_retired(u_retired),
    .fill_valid(fill_valid && !fill.is_ret), .fill_pc(fill.pc), .fill_is_call(fill.is_call),
    .fill_target(fill.target), .fill_evict(usbb_evict),
    .rt_valid(rt_valid && rt_src == SRC_USBB), .rt_pc, .rt_hit(u_rt_hit)
  );

  r_sbb #(.ENTRIES(RSBB_ENTRIES), .WAYS(RSBB_WAYS)) u_rsbb (
    .clk, .rst_n,
    .lk_valid(lk_valid && !btb_hit && !u_hit), .lk_pc,
    .lk_hit(r_hit), .lk_ret_imm(r_ret_imm), .lk_retired(r_retired),
    .fill_valid(fill_valid && fill.is_ret), .fill_pc(fill.pc), .fill_ret_imm(fill.ret_imm),
    .fill_evict(rsbb_evict),
    .rt_valid(rt_valid && rt_src == SRC_RSBB), .rt_pc, .rt_hit(r_rt_hit)
  );

  assign retire_hit = (rt_valid && rt_src == SRC_USBB && u_rt_hit) ||
                      (rt_valid && rt_src == SRC_RSBB && r_rt_hit);

  // ---- selection --------------------------------------------------------------
  always_comb begin
    pred_hit = 1'b0; pred_src = SRC_NONE; pred_type = BR_COND; pred_target = '0;
    pred_retired = 1'b0; pred_ret_imm = 1'b0;
    if (btb_hit) begin
      pred_hit    = !(btb_type == BR_RET && !ras_valid);
      pred_src    = SRC_BTB;
      pred_type   = btb_type;
      pred_target = (btb_type == BR_RET) ? ras_top : btb_target;
    end else if (u_hit) begin
      pred_hit    = 1'b1;
      pred_src    = SRC_USBB;
      pred_type   = u_is_call ? BR_CALL : BR_UNCOND;
      pred_target = u_target;
      pred_retired = u_retired;
    end else if (r_hit && ras_valid) begin
      pred_hit    = 1'b1;
      pred_src    = SRC_RSBB;
      pred_type   = BR_RET;
      pred_target = ras_top;
      pred_retired = r_retired;
      pred_ret_imm = r_ret_imm;
    end
  end

  // ---- return address stack -------------------------------------------------------
  logic ras_push, ras_pop;
  assign ras_push = lk_valid && pred_hit && pred_type == BR_CALL;
  assign ras_pop  = lk_valid && pred_hit && pred_type == BR_RET;

  ras #(.DEPTH(RAS_DEPTH)) u_ras (
    .clk, .rst_n,
    .push(ras_push), .push_addr(lk_pc + CALL_LEN), .pop(ras_pop),
    .top_valid(ras_valid), .top_addr(ras_top), .overflow(ras_overflow)
  );

endmodule

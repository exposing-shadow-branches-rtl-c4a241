// skia_frontend: decoupled x86 front end with shadow branch decoding.
//
// Blocks and their connections:
//
//   lookups --> skia_bpu (BTB | U-SBB | R-SBB, RAS) --> block former --> ftq --> fetch engine
//                  ^                                                     |  prefetch to L1-I
//                  +---- SBB fill <-- shadow_branch_decoder <-- lines read for FTQ entries
//
// Block former (this design's minimal instruction address generator): the
// current basic block starts at blk_start. Each lookup (lk_pc, the address of
// an instruction on the predicted path, supplied from outside together with
// the conditional direction lk_cond_taken of the direction predictor) that
// the BPU predicts as a taken branch closes the block: an FTQ entry {start,
// exit = lk_pc, target} is enqueued and the next block starts at the target.
// A full FTQ stalls lookups (lk_ready low). A resteer from the decoder or the
// back end flushes the FTQ and restarts the block at resteer_pc.
//
// Shadow decoding: the fetch engine dequeues FTQ entries and returns the lines
// it reads (line_valid, line_addr, line_data). For the entry being fetched,
// the line holding its start gets head decoding up to the entry offset, and
// the line holding its taken exit branch gets tail decoding after that
// branch (both when they are the same line). If the decoder is still busy
// with an earlier line the new line is skipped (event sbd_drop).
//
// Ports are plain signals and structs. The direction predictor (TAGE-SC-L),
// the indirect predictor (ITTAGE), the L1-I, the fetch engine and the core's
// decoder are outside; their signals are the ports here. All outputs named
// ev_* are one-cycle event pulses for performance counting.
//
// From the paper: the BTB/SBB organisation and sizes, SBB accessed in
// parallel with the BTB and used on a BTB miss, SBD fed with FDIP-fetched
// lines for head (entry line) and tail (exit line) decoding, 24-entry FTQ.
// Head and tail decoding can be switched off separately (HEAD_DECODE,
// TAIL_DECODE), as the two are independent; both are on by default.
// This design's choices: the block former, the lookup interface, dropping
// lines while the SBD is busy, and tracking only the last dequeued entry.
module skia_frontend
  import skia_pkg::*;
#(
  parameter int unsigned BTB_ENTRIES     = 8192,
  parameter int unsigned USBB_ENTRIES    = 768,
  parameter int unsigned RSBB_ENTRIES    = 2024,
  parameter int unsigned SBB_WAYS        = 4,
  parameter int unsigned RAS_DEPTH       = 16,
  parameter int unsigned FTQ_DEPTH       = 24,
  parameter int unsigned MAX_VALID_PATHS = 6,
  parameter bit          HEAD_DECODE     = 1'b1,  // decode head shadows
  parameter bit          TAIL_DECODE     = 1'b1   // decode tail shadows
) (
  input  logic       clk,
  input  logic       rst_n,
  // predicted-path lookups
  input  logic       lk_valid,
  output logic       lk_ready,
  input  addr_t      lk_pc,
  input  logic       lk_cond_taken,
  output logic       pred_hit,
  output pred_src_e  pred_src,
  output br_type_e   pred_type,
  output addr_t      pred_target,
  output logic       pred_retired,
  output logic       pred_ret_imm,
  // resteer (early from decode or late from execute)
  input  logic       resteer_valid,
  input  addr_t      resteer_pc,
  // FTQ to the fetch engine and prefetches to the L1-I
  output logic       ftq_deq_valid,
  input  logic       ftq_deq_ready,
  output ftq_entry_t ftq_deq_entry,
  output logic       pf_valid,
  output addr_t      pf_line,
  output logic [$clog2(FTQ_DEPTH):0] ftq_occupancy,
  // lines the fetch engine read from the L1-I
  input  logic       line_valid,
  input  addr_t      line_addr,
  input  line_t      line_data,
  // BTB fill from the core's decoder
  input  logic       btb_upd_valid,
  input  addr_t      btb_upd_pc,
  input  br_type_e   btb_upd_type,
  input  addr_t      btb_upd_target,
  // commit of a branch predicted by an SBB
  input  logic       rt_valid,
  input  addr_t      rt_pc,
  input  pred_src_e  rt_src,
  // events
  output logic       ev_sbb_fill_head,
  output logic       ev_sbb_fill_tail,
  output logic       ev_head_discard,
  output logic       ev_sbd_drop,
  output logic       ev_sbd_start,
  output logic       ev_usbb_evict,
  output logic       ev_rsbb_evict,
  output logic       ev_retire_hit,
  output logic       ev_ras_overflow,
  output logic       ev_ftq_full,
  output logic       ev_sbd_done,
  output logic [6:0] sbd_head_paths   // valid head paths of the last head decode
);

  // ---- BPU -------------------------------------------------------------------------
  logic      fill_valid;
  sbb_fill_t fill;
  logic      lk_fire;

  skia_bpu #(
    .BTB_ENTRIES(BTB_ENTRIES), .BTB_WAYS(4),
    .USBB_ENTRIES(USBB_ENTRIES), .USBB_WAYS(SBB_WAYS),
    .RSBB_ENTRIES(RSBB_ENTRIES), .RSBB_WAYS(SBB_WAYS),
    .RAS_DEPTH(RAS_DEPTH)
  ) u_bpu (
    .clk, .rst_n,
    .lk_valid(lk_fire), .lk_pc,
    .pred_hit, .pred_src, .pred_type, .pred_target, .pred_retired, .pred_ret_imm,
    .btb_upd_valid, .btb_upd_pc, .btb_upd_type, .btb_upd_target,
    .fill_valid, .fill,
    .rt_valid, .rt_pc, .rt_src,
    .usbb_evict(ev_usbb_evict), .rsbb_evict(ev_rsbb_evict),
    .retire_hit(ev_retire_hit), .ras_overflow(ev_ras_overflow)
  );

  // ---- block former --------------------------------------------------------------
  addr_t      blk_start_q;
  logic       taken;
  logic       enq_ready;
  ftq_entry_t enq_entry;

  assign taken    = pred_hit && (pred_type != BR_COND || lk_cond_taken);
  assign lk_ready = enq_ready && !resteer_valid;
  assign lk_fire  = lk_valid && lk_ready;
  assign ev_ftq_full = lk_valid && !enq_ready && !resteer_valid;

  always_comb begin
    enq_entry.start_pc = blk_start_q;
    enq_entry.exit_pc  = lk_pc;
    enq_entry.taken    = 1'b1;
    enq_entry.target   = pred_target;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                blk_start_q <= '0;
    else if (resteer_valid)    blk_start_q <= resteer_pc;
    else if (lk_fire && taken) blk_start_q <= pred_target;
  end

  // ---- FTQ ------------------------------------------------------------------------
  ftq #(.DEPTH(FTQ_DEPTH)) u_ftq (
    .clk, .rst_n, .flush(resteer_valid),
    .enq_valid(lk_fire && taken), .enq_ready, .enq_entry,
    .deq_valid(ftq_deq_valid), .deq_ready(ftq_deq_ready), .deq_entry(ftq_deq_entry),
    .pf_valid, .pf_line, .occupancy(ftq_occupancy)
  );

  // ---- entry being fetched and SBD requests ------------------------------------------
  addr_t      cur_start_q, cur_exit_q;
  logic       cur_taken_q, cur_valid_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_start_q <= '0;
      cur_exit_q  <= '0;
      cur_taken_q <= 1'b0;
      cur_valid_q <= 1'b0;
    end else if (resteer_valid) begin
      cur_valid_q <= 1'b0;
    end else if (ftq_deq_valid && ftq_deq_ready) begin
      cur_start_q <= ftq_deq_entry.start_pc;
      cur_exit_q  <= ftq_deq_entry.exit_pc;
      cur_taken_q <= ftq_deq_entry.taken;
      cur_valid_q <= 1'b1;
    end
  end

  logic  sbd_ready, head_en, tail_en, sbd_req;

  assign head_en = HEAD_DECODE && cur_valid_q && line_base(line_addr) == line_base(cur_start_q)
                   && line_off(cur_start_q) != '0;
  assign tail_en = TAIL_DECODE && cur_valid_q && cur_taken_q
                   && line_base(line_addr) == line_base(cur_exit_q);
  assign sbd_req = line_valid && (head_en || tail_en);
  assign ev_sbd_start = sbd_req && sbd_ready;
  assign ev_sbd_drop  = sbd_req && !sbd_ready;

  shadow_branch_decoder #(.MAX_VALID_PATHS(MAX_VALID_PATHS)) u_sbd (
    .clk, .rst_n,
    .req_valid(sbd_req), .ready(sbd_ready),
    .req_line(line_data), .req_base(line_addr),
    .req_head_en(head_en), .req_entry(line_off(cur_start_q)),
    .req_tail_en(tail_en), .req_exit(line_off(cur_exit_q)),
    .fill_valid, .fill,
    .head_paths(sbd_head_paths), .head_discard(ev_head_discard), .done(ev_sbd_done)
  );

  assign ev_sbb_fill_head = fill_valid && fill.head;
  assign ev_sbb_fill_tail = fill_valid && !fill.head;

endmodule

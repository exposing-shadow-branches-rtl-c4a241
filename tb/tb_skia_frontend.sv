// tb_skia_frontend: end-to-end test of the front end at its full size.
//
// The top is instantiated with no parameter overrides (8K-entry BTB,
// 768-entry U-SBB, 2024-entry R-SBB, 24-entry FTQ). The testbench plays the
// parts that are outside the design:
//   - the predicted-path walker, which offers lookup addresses (lookup task);
//   - the core's decoder, which fills the BTB (btb_fill task), commits
//     SBB-predicted branches (retire task) and resteers;
//   - the fetch engine with the L1-I: it dequeues FTQ entries and returns
//     every line from the entry's start line to its exit line, reading the
//     bytes from a small sparse memory of hand-assembled x86-64 code (any
//     byte not set is a one-byte nop, 90). With wait_sbd set it waits for the
//     shadow decoder to finish before the next entry, otherwise it streams.
//
// Program (line base: what is in it):
//   0x401000  entry at byte 24 preceded by a head region with one call at
//             byte 19 (E8 58 59 FB FF, five valid paths); jmp rel32 at 32
//   0x500000  jmp rel32 exit at byte 4; tail: jmp rel32 at 9, ret at 14
//   0x700000  only nops; entered at byte 32 (15 valid paths: discarded)
//   0x800000 + k*0x17B80, k = 0..5: jmp rel32 exit at 0; tail: jmp rel32 at
//             5 and ret at 10. The stride is a multiple of 192 (U-SBB sets)
//             and of 64*506 (R-SBB sets by line), so all six jumps share a
//             U-SBB set and all six returns an R-SBB set: evictions follow.
//
// Every mechanism is counted and must occur at least once: BTB, U-SBB and
// R-SBB predictions, head and tail fills, head discard, SBD drop, FTQ full
// stall, prefetch, resteer flush, retire hit, U-SBB and R-SBB eviction, RAS
// overflow. Predicted targets are also checked against the hand-computed
// values.
module tb_skia_frontend;
  import skia_pkg::*;

  logic       clk = 0, rst_n = 0;
  logic       lk_valid = 0, lk_ready, lk_cond_taken = 0;
  addr_t      lk_pc = '0;
  logic       pred_hit, pred_retired, pred_ret_imm;
  pred_src_e  pred_src;
  br_type_e   pred_type;
  addr_t      pred_target;
  logic       resteer_valid = 0;
  addr_t      resteer_pc = '0;
  logic       ftq_deq_valid, ftq_deq_ready = 0, pf_valid;
  ftq_entry_t ftq_deq_entry;
  addr_t      pf_line;
  logic [$clog2(24):0] ftq_occupancy;
  logic       line_valid = 0;
  addr_t      line_addr = '0;
  line_t      line_data = '0;
  logic       btb_upd_valid = 0;
  addr_t      btb_upd_pc = '0, btb_upd_target = '0;
  br_type_e   btb_upd_type = BR_COND;
  logic       rt_valid = 0;
  addr_t      rt_pc = '0;
  pred_src_e  rt_src = SRC_NONE;
  logic       ev_sbb_fill_head, ev_sbb_fill_tail, ev_head_discard, ev_sbd_drop,
              ev_sbd_start, ev_usbb_evict, ev_rsbb_evict, ev_retire_hit,
              ev_ras_overflow, ev_ftq_full, ev_sbd_done;
  logic [6:0] sbd_head_paths;

  skia_frontend dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- event counters -----------------------------------------------------------
  int n_btb = 0, n_usbb = 0, n_rsbb = 0, n_head = 0, n_tail = 0, n_discard = 0;
  int n_drop = 0, n_full = 0, n_pf = 0, n_flush = 0, n_retire = 0;
  int n_uev = 0, n_rev = 0, n_ovf = 0, n_enq = 0;
  logic sbd_busy = 0;
  sbb_fill_t fills [$];

  always @(posedge clk) if (rst_n) begin
    if (lk_valid && lk_ready && pred_hit) begin
      if (pred_src == SRC_BTB)  n_btb++;
      if (pred_src == SRC_USBB) n_usbb++;
      if (pred_src == SRC_RSBB) n_rsbb++;
    end
    if (ev_sbb_fill_head) n_head++;
    if (ev_sbb_fill_tail) n_tail++;
    if (ev_sbb_fill_head || ev_sbb_fill_tail) fills.push_back(dut.fill);
    if (ev_head_discard) n_discard++;
    if (ev_sbd_drop)     n_drop++;
    if (ev_ftq_full)     n_full++;
    if (pf_valid)        n_pf++;
    if (resteer_valid && ftq_occupancy != 0) n_flush++;
    if (ev_retire_hit)   n_retire++;
    if (ev_usbb_evict)   n_uev++;
    if (ev_rsbb_evict)   n_rev++;
    if (ev_ras_overflow) n_ovf++;
    if (ev_sbd_start)     sbd_busy <= 1'b1;
    else if (ev_sbd_done) sbd_busy <= 1'b0;
  end

  // ---- code memory ------------------------------------------------------------------
  logic [7:0] mem [addr_t];

  function automatic line_t mem_line(addr_t base);
    line_t l;
    for (int k = 0; k < LINE_BYTES; k++) begin
      addr_t a = base + addr_t'(k);
      l[8*k +: 8] = mem.exists(a) ? mem[a] : 8'h90;
    end
    return l;
  endfunction

  task automatic put(input addr_t a, input int n, input logic [8*8-1:0] v);
    // v holds n bytes, first byte leftmost in the low n*8 bits
    for (int k = 0; k < n; k++) mem[a + addr_t'(k)] = v[8*(n-1-k) +: 8];
  endtask

  // jmp rel32 at a to target t
  task automatic put_jmp(input addr_t a, input addr_t t);
    logic [31:0] rel;
    rel = 32'(t - (a + 64'd5));
    put(a, 5, {8'hE9, rel[7:0], rel[15:8], rel[23:16], rel[31:24]});
  endtask

  // ---- fetch engine model ---------------------------------------------------------
  logic fetch_en = 0, wait_sbd = 1;

  initial begin : fetch
    ftq_entry_t e;
    addr_t a;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (fetch_en && ftq_deq_valid && !resteer_valid) begin
        ftq_deq_ready = 1;
        e = ftq_deq_entry;
        @(negedge clk);
        ftq_deq_ready = 0;
        a = line_base(e.start_pc);
        for (int n = 0; n < 8 && a <= line_base(e.exit_pc); n++) begin
          line_valid = 1; line_addr = a; line_data = mem_line(a);
          @(negedge clk);
          a = a + 64'd64;
        end
        line_valid = 0;
        if (wait_sbd) while (sbd_busy) @(negedge clk);
      end
    end
  end

  // ---- drivers --------------------------------------------------------------------
  logic      l_hit;
  pred_src_e l_src;
  br_type_e  l_type;
  addr_t     l_tgt;
  logic      l_retired;

  task automatic lookup(input addr_t pc);
    @(negedge clk);
    lk_valid = 1; lk_pc = pc; lk_cond_taken = 1;
    #1;
    while (!lk_ready) begin @(negedge clk); #1; end
    l_hit = pred_hit; l_src = pred_src; l_type = pred_type; l_tgt = pred_target;
    l_retired = pred_retired;
    @(negedge clk);
    lk_valid = 0;
  endtask

  task automatic btb_fill(input addr_t pc, input br_type_e ty, input addr_t tgt);
    @(negedge clk);
    btb_upd_valid = 1; btb_upd_pc = pc; btb_upd_type = ty; btb_upd_target = tgt;
    @(negedge clk);
    btb_upd_valid = 0;
  endtask

  task automatic resteer(input addr_t pc);
    @(negedge clk);
    resteer_valid = 1; resteer_pc = pc;
    @(negedge clk);
    resteer_valid = 0;
  endtask

  task automatic retire(input addr_t pc, input pred_src_e src);
    @(negedge clk);
    rt_valid = 1; rt_pc = pc; rt_src = src;
    @(negedge clk);
    rt_valid = 0;
  endtask

  task automatic drain();
    int n = 0;
    while ((ftq_occupancy != 0 || sbd_busy || line_valid) && n < 5000) begin
      @(negedge clk); n++;
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t LB     = 64'h40_1000;
  localparam addr_t LT     = 64'h50_0000;
  localparam addr_t LD     = 64'h70_0000;
  localparam addr_t LE     = 64'h80_0000;
  localparam addr_t STRIDE = 64'h1_7B80;
  localparam addr_t CALL_TGT = LB + 64'd24 + 64'hFFFF_FFFF_FFFB_5958;

  initial begin
    int found, fires;
    // ---- program -----------------------------------------------------------------
    put(LB + 0, 2, {8'h48, 8'hB8});
    for (int k = 2; k < 10; k++) put(LB + addr_t'(k), 1, 8'h06);
    put(LB + 10, 4, {8'h48, 8'h83, 8'hC4, 8'h10});
    put(LB + 14, 5, {8'h49, 8'h8B, 8'hF3, 8'h66, 8'h90});
    put(LB + 19, 5, {8'hE8, 8'h58, 8'h59, 8'hFB, 8'hFF});
    put(LB + 24, 5, {8'h4C, 8'h8B, 8'h54, 8'h24, 8'h08});
    put_jmp(LB + 32, LT);
    put_jmp(LT + 4, 64'h60_0000);
    put_jmp(LT + 9, LT + 64'h100);
    put(LT + 14, 1, 8'hC3);
    for (int k = 0; k < 6; k++) begin
      put_jmp(LE + STRIDE * addr_t'(k), LE + STRIDE * addr_t'(k + 1));
      put_jmp(LE + STRIDE * addr_t'(k) + 5, 64'h90_0000);
      put(LE + STRIDE * addr_t'(k) + 10, 1, 8'hC3);
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    fetch_en = 1; wait_sbd = 1;

    // The decoder has filled the BTB with the taken exits of the blocks.
    btb_fill(LB + 32, BR_UNCOND, LT);
    btb_fill(LT + 4, BR_UNCOND, 64'h60_0000);
    btb_fill(LD + 48, BR_UNCOND, LD + 64'h100);
    for (int k = 0; k < 6; k++)
      btb_fill(LE + STRIDE * addr_t'(k), BR_UNCOND, LE + STRIDE * addr_t'(k + 1));

    // ---- 1: head shadow of line LB, tail shadow of line LT ------------------------------
    lookup(LB + 19);
    check("call not yet known", !l_hit);
    resteer(LB + 24);
    lookup(LB + 32);
    check("BTB predicts the jump at LB+32", l_hit && l_src == SRC_BTB && l_tgt == LT);
    lookup(LT + 4);
    check("BTB predicts the jump at LT+4", l_hit && l_src == SRC_BTB && l_tgt == 64'h60_0000);
    drain();
    check("head fill seen", n_head >= 1);
    check("five valid head paths in LB", sbd_head_paths == 7'd5);
    found = 0;
    foreach (fills[i]) begin
      if (fills[i].head && fills[i].is_call && fills[i].pc == LB + 19 &&
          fills[i].target == CALL_TGT) found |= 1;
      if (!fills[i].head && !fills[i].is_call && !fills[i].is_ret && fills[i].pc == LT + 9 &&
          fills[i].target == LT + 64'h100) found |= 2;
      if (!fills[i].head && fills[i].is_ret && fills[i].pc == LT + 14) found |= 4;
    end
    check("head call, tail jump and tail return were filled", found == 7);

    // ---- 2: predictions from the SBBs --------------------------------------------------
    lookup(LB + 19);
    check("U-SBB predicts the call", l_hit && l_src == SRC_USBB && l_type == BR_CALL &&
                                     l_tgt == CALL_TGT);
    lookup(LT + 14);
    check("R-SBB predicts the return to the call", l_hit && l_src == SRC_RSBB &&
                                                  l_type == BR_RET && l_tgt == LB + 24);
    lookup(LT + 9);
    check("U-SBB predicts the jump", l_hit && l_src == SRC_USBB && l_type == BR_UNCOND &&
                                     l_tgt == LT + 64'h100);
    retire(LB + 19, SRC_USBB);
    check("retire of the SBB call hits", n_retire == 1);
    lookup(LB + 19);
    check("call entry now retired", l_hit && l_src == SRC_USBB && l_retired);
    lookup(LT + 14);
    drain();

    // ---- 3: head discard -------------------------------------------------------------
    resteer(LD + 32);
    lookup(LD + 48);
    drain();
    check("line of nops entered at byte 32 is discarded", n_discard >= 1);
    check("fifteen valid head paths", sbd_head_paths == 7'd15);

    // ---- 4: FTQ full, then a resteer flushes it -------------------------------------
    fetch_en = 0;
    drain();
    @(negedge clk);
    lk_valid = 1; lk_pc = LD + 48; fires = 0;
    for (int c = 0; c < 40; c++) begin
      #1 if (lk_ready) fires++;
      @(negedge clk);
    end
    lk_valid = 0;
    check($sformatf("FTQ takes 24 entries (%0d)", fires), fires == 24);
    check("FTQ reports full", n_full >= 1 && ftq_occupancy == 24);
    check("prefetches were issued", n_pf >= 24);
    resteer(LD + 32);
    check("resteer flushed the FTQ", n_flush == 1 && ftq_occupancy == 0);
    fetch_en = 1;

    // ---- 5: streaming fetch: RAS overflow and SBD drops ------------------------------
    wait_sbd = 0;
    for (int k = 0; k < 17; k++) lookup(LB + 19);
    check("seventeen calls overflow the 16-entry RAS", n_ovf >= 1);
    drain();
    check("lines were dropped while the SBD was busy", n_drop >= 1);
    wait_sbd = 1;

    // ---- 6: evictions from one U-SBB set and one R-SBB set ----------------------------
    resteer(LE);
    for (int k = 0; k < 6; k++) lookup(LE + STRIDE * addr_t'(k));
    drain();
    check("U-SBB eviction", n_uev >= 1);
    check("R-SBB eviction", n_rev >= 1);

    // ---- every mechanism happened -----------------------------------------------------
    check("BTB predictions", n_btb > 0);
    check("U-SBB predictions", n_usbb > 0);
    check("R-SBB predictions", n_rsbb > 0);
    check("head fills", n_head > 0);
    check("tail fills", n_tail > 0);
    check("head discards", n_discard > 0);
    check("SBD drops", n_drop > 0);
    check("FTQ full", n_full > 0);
    check("prefetches", n_pf > 0);
    check("flushes", n_flush > 0);
    check("retire hits", n_retire > 0);
    check("U-SBB evictions", n_uev > 0);
    check("R-SBB evictions", n_rev > 0);
    check("RAS overflow", n_ovf > 0);
    $display("btb=%0d usbb=%0d rsbb=%0d head=%0d tail=%0d discard=%0d drop=%0d full=%0d",
             n_btb, n_usbb, n_rsbb, n_head, n_tail, n_discard, n_drop, n_full);
    $display("pf=%0d flush=%0d retire=%0d uev=%0d rev=%0d ovf=%0d",
             n_pf, n_flush, n_retire, n_uev, n_rev, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

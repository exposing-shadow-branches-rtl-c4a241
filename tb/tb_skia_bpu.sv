// tb_skia_bpu: checks how the BTB, the two SBBs and the RAS are combined.
//
// Small tables (16-entry BTB, U-SBB and R-SBB, 4 ways; 4-entry RAS) so that
// eviction and overflow are reached quickly. Directed sequence:
//   - empty tables: no prediction;
//   - a U-SBB jump is predicted on a BTB miss with its stored target;
//   - once the BTB holds the same address, the BTB prediction wins;
//   - a U-SBB call pushes pc + 5; an R-SBB return then predicts that address
//     and pops; with the RAS empty the R-SBB hit gives no prediction;
//   - a BTB return takes its target from the RAS;
//   - RET imm16 type bit, retire of U-SBB and R-SBB entries (retired bit seen
//     on the next lookup), retire of an absent entry (no hit);
//   - a fifth fill into one U-SBB set and one R-SBB set evicts;
//   - five calls into a 4-entry RAS overflow it.
module tb_skia_bpu;
  import skia_pkg::*;

  logic      clk = 0, rst_n = 0;
  logic      lk_valid = 0;
  addr_t     lk_pc = '0;
  logic      pred_hit, pred_retired, pred_ret_imm;
  pred_src_e pred_src;
  br_type_e  pred_type;
  addr_t     pred_target;
  logic      btb_upd_valid = 0;
  addr_t     btb_upd_pc = '0, btb_upd_target = '0;
  br_type_e  btb_upd_type = BR_COND;
  logic      fill_valid = 0;
  sbb_fill_t fill = '0;
  logic      rt_valid = 0;
  addr_t     rt_pc = '0;
  pred_src_e rt_src = SRC_NONE;
  logic      usbb_evict, rsbb_evict, retire_hit, ras_overflow;

  int checks = 0, failures = 0;
  int n_evict_u = 0, n_evict_r = 0, n_ovf = 0;
  logic last_retired = 0, last_ret_imm = 0;  // sampled with the last lookup

  skia_bpu #(.BTB_ENTRIES(16), .BTB_WAYS(4), .USBB_ENTRIES(16), .USBB_WAYS(4),
             .RSBB_ENTRIES(16), .RSBB_WAYS(4), .RAS_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (usbb_evict)   n_evict_u++;
    if (rsbb_evict)   n_evict_r++;
    if (ras_overflow) n_ovf++;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // One lookup; the prediction is sampled before the clock edge that
  // applies its RAS update.
  task automatic look(input addr_t pc, output logic hit, output pred_src_e src,
                      output br_type_e ty, output addr_t tgt);
    @(negedge clk);
    lk_valid = 1; lk_pc = pc;
    #1;
    hit = pred_hit; src = pred_src; ty = pred_type; tgt = pred_target;
    last_retired = pred_retired; last_ret_imm = pred_ret_imm;
    @(posedge clk);
    @(negedge clk) lk_valid = 0;
  endtask

  task automatic sbb_fill(input logic is_ret, input logic is_call, input logic imm,
                          input addr_t pc, input addr_t tgt);
    @(negedge clk);
    fill_valid = 1;
    fill = '{is_ret: is_ret, is_call: is_call, ret_imm: imm, head: 1'b0, pc: pc, target: tgt};
    @(posedge clk);
    @(negedge clk) fill_valid = 0;
  endtask

  task automatic btb_fill(input addr_t pc, input br_type_e ty, input addr_t tgt);
    @(negedge clk);
    btb_upd_valid = 1; btb_upd_pc = pc; btb_upd_type = ty; btb_upd_target = tgt;
    @(posedge clk);
    @(negedge clk) btb_upd_valid = 0;
  endtask

  task automatic retire(input addr_t pc, input pred_src_e src, output logic hit);
    @(negedge clk);
    rt_valid = 1; rt_pc = pc; rt_src = src;
    #1 hit = retire_hit;
    @(posedge clk);
    @(negedge clk) rt_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic hit, rh;
    pred_src_e src;
    br_type_e ty;
    addr_t tgt;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    look(64'h1000, hit, src, ty, tgt);
    check("empty: no prediction", !hit && src == SRC_NONE);

    // U-SBB jump on a BTB miss.
    sbb_fill(0, 0, 0, 64'h1000, 64'h2345);
    look(64'h1000, hit, src, ty, tgt);
    check("U-SBB jump hit", hit && src == SRC_USBB && ty == BR_UNCOND && tgt == 64'h2345);
    check("U-SBB entry not yet retired", last_retired == 0);

    // The BTB wins once it holds the branch.
    btb_fill(64'h1000, BR_UNCOND, 64'h3456);
    look(64'h1000, hit, src, ty, tgt);
    check("BTB has priority over U-SBB", hit && src == SRC_BTB && tgt == 64'h3456);

    // R-SBB return with an empty RAS: no prediction.
    sbb_fill(1, 0, 0, 64'h5013, '0);
    look(64'h5013, hit, src, ty, tgt);
    check("R-SBB hit with empty RAS gives no prediction", !hit);

    // Call from the U-SBB, then the return from the R-SBB.
    sbb_fill(0, 1, 0, 64'h4001, 64'h5000);
    look(64'h4001, hit, src, ty, tgt);
    check("U-SBB call hit", hit && src == SRC_USBB && ty == BR_CALL && tgt == 64'h5000);
    look(64'h5013, hit, src, ty, tgt);
    check("R-SBB return target from RAS", hit && src == SRC_RSBB && ty == BR_RET
                                          && tgt == 64'h4006);
    check("plain RET type bit", last_ret_imm == 0);
    look(64'h5013, hit, src, ty, tgt);
    check("RAS popped by the return", !hit);

    // An R-SBB entry at the same line but another offset does not match.
    sbb_fill(1, 0, 1, 64'h5027, '0);
    look(64'h4001, hit, src, ty, tgt);
    look(64'h5014, hit, src, ty, tgt);
    check("R-SBB matches the exact byte offset only", !hit);
    look(64'h5027, hit, src, ty, tgt);
    check("R-SBB RET imm16", hit && src == SRC_RSBB && tgt == 64'h4006 && last_ret_imm);

    // BTB return takes the RAS top.
    btb_fill(64'h7000, BR_CALL, 64'h7100);
    btb_fill(64'h7105, BR_RET, '0);
    look(64'h7000, hit, src, ty, tgt);
    check("BTB call", hit && src == SRC_BTB && ty == BR_CALL && tgt == 64'h7100);
    look(64'h7105, hit, src, ty, tgt);
    check("BTB return uses the RAS", hit && src == SRC_BTB && ty == BR_RET && tgt == 64'h7005);

    // Retire.
    retire(64'h4001, SRC_USBB, rh);
    check("retire of a U-SBB entry hits", rh);
    look(64'h4001, hit, src, ty, tgt);
    check("U-SBB entry now retired", hit && src == SRC_USBB && last_retired);
    retire(64'h5013, SRC_RSBB, rh);
    check("retire of an R-SBB entry hits", rh);
    look(64'h5013, hit, src, ty, tgt);
    check("R-SBB entry now retired", hit && src == SRC_RSBB && last_retired);
    retire(64'h9999, SRC_USBB, rh);
    check("retire of an absent entry misses", !rh);
    retire(64'h4001, SRC_BTB, rh);
    check("retire of a BTB prediction is not an SBB retire", !rh);

    // Eviction: U-SBB has 4 sets (set = pc mod 4); pcs 0x102 + 4k share set 2.
    for (int k = 0; k < 5; k++) sbb_fill(0, 0, 0, 64'h102 + 64'(4 * k), 64'h800);
    check("fifth U-SBB fill into a set evicts", n_evict_u == 1);
    // R-SBB: 4 sets by line; lines 0x10040 + 4*64*k share set 1.
    for (int k = 0; k < 5; k++) sbb_fill(1, 0, 0, 64'h10040 + 64'(256 * k), '0);
    check("fifth R-SBB fill into a set evicts", n_evict_r == 1);

    // RAS overflow: five calls with a 4-entry RAS.
    for (int k = 0; k < 5; k++) look(64'h4001, hit, src, ty, tgt);
    check("RAS overflows on the fifth call", n_ovf == 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

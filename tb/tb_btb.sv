// tb_btb: checks the BTB's update/lookup path and its LRU replacement.
//
// A 16-entry, 4-way instance (4 sets, set = pc mod 4). Branches of each type
// are written and read back; then a fifth branch in a full set must replace
// the way whose LRU bit is clear and not the one just looked up.
module tb_btb;
  import skia_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lk_valid = 0, lk_hit;
  addr_t lk_pc = '0, lk_target;
  br_type_e lk_type;
  logic upd_valid = 0;
  addr_t upd_pc = '0, upd_target = '0;
  br_type_e upd_type = BR_COND;
  int checks = 0, failures = 0;

  btb #(.ENTRIES(16), .WAYS(4)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic addr_t tgt(int k); return 64'h0000_5555_0000_0000 ^ (64'(k) << 7); endfunction
  function automatic br_type_e ty(int k); return br_type_e'(k % 4); endfunction

  task automatic upd(input int k);
    @(negedge clk); upd_valid = 1; upd_pc = 64'(4 * k); upd_type = ty(k); upd_target = tgt(k);
    @(posedge clk); #1 upd_valid = 0;
  endtask

  task automatic look(input int k, input logic exp_hit);
    @(negedge clk); lk_valid = 1; lk_pc = 64'(4 * k); #1;
    check($sformatf("k=%0d hit=%b expected %b", k, lk_hit, exp_hit), lk_hit == exp_hit);
    if (exp_hit && lk_hit) begin
      check($sformatf("k=%0d target", k), lk_target == tgt(k));
      check($sformatf("k=%0d type", k), lk_type == ty(k));
    end
    @(posedge clk); #1 lk_valid = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 1; k <= 4; k++) look(k, 0);
    for (int k = 1; k <= 4; k++) upd(k);     // LRU 0001 0011 0111 1000
    for (int k = 1; k <= 4; k++) look(k, 1);
    // Touch order ways 0,1,2,3 from 1000: 1001, 1011, all set -> 0100, 1100.
    look(1 + 1, 1);                          // way 1: 1110
    upd(5);                                  // victim: way 0 (k=1)
    look(1, 0); look(2, 1); look(3, 1); look(4, 1); look(5, 1);
    // A tag that is absent from the full set misses.
    look(9, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

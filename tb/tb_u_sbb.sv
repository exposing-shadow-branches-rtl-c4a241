// tb_u_sbb: checks the U-SBB's lookup, fill, retire and retired-aware LRU.
//
// A 16-entry, 4-way instance (4 sets) is filled with jumps and calls whose
// addresses all fall into set 0 (pc = 4*k, so tag = k). The expected victim
// of each fill is worked out by hand from the replacement rule: invalid way,
// then non-retired with clear LRU bit, then non-retired, then clear LRU bit.
// Lookups are combinational, so outputs are sampled in the cycle they are
// asked for; fills and retires take effect at the next rising edge.
module tb_u_sbb;
  import skia_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lk_valid = 0, lk_hit, lk_is_call, lk_retired;
  addr_t lk_pc = '0, lk_target;
  logic fill_valid = 0, fill_is_call = 0, fill_evict;
  addr_t fill_pc = '0, fill_target = '0;
  logic rt_valid = 0, rt_hit;
  addr_t rt_pc = '0;
  int checks = 0, failures = 0;

  u_sbb #(.ENTRIES(16), .WAYS(4)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic addr_t tgt(int k);  return 64'hFFFF_8000_0000_0000 + 64'(k) * 64'h1234; endfunction

  task automatic fill(input int k, input logic call, output logic evicted);
    @(negedge clk);
    fill_valid = 1; fill_pc = 64'(4 * k); fill_is_call = call; fill_target = tgt(k);
    #1 evicted = fill_evict;
    @(posedge clk); #1 fill_valid = 0;
  endtask

  task automatic retire(input int k, output logic hit);
    @(negedge clk);
    rt_valid = 1; rt_pc = 64'(4 * k);
    #1 hit = rt_hit;
    @(posedge clk); #1 rt_valid = 0;
  endtask

  task automatic look(input int k, input logic exp_hit, input logic touch);
    @(negedge clk);
    lk_valid = touch; lk_pc = 64'(4 * k);
    #1;
    check($sformatf("k=%0d hit=%b expected %b", k, lk_hit, exp_hit), lk_hit == exp_hit);
    if (exp_hit && lk_hit) begin
      check($sformatf("k=%0d target", k), lk_target == tgt(k));
      check($sformatf("k=%0d type", k), lk_is_call == k[0]);
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
    logic ev, h;
    repeat (2) @(posedge clk);
    rst_n = 1;
    look(1, 0, 1);
    for (int k = 1; k <= 4; k++) begin
      fill(k, k[0], ev);
      check($sformatf("fill %0d into a free way evicts nothing", k), !ev);
    end
    for (int k = 1; k <= 4; k++) look(k, 1, 0);
    look(5, 0, 1);
    look(5 + 4, 0, 1);           // same set index? pc=36 -> set 1, different set
    // Re-filling an existing branch updates it in place.
    fill(4, 0, ev);
    check("refill of a present branch evicts nothing", !ev);
    look(4, 1, 0);
    // Retire k=1 and k=2; k=9 is absent.
    retire(1, h); check("retire k=1 hits", h);
    retire(2, h); check("retire k=2 hits", h);
    retire(9, h); check("retire of an absent branch misses", !h);
    @(negedge clk); lk_pc = 64'(4 * 1); #1 check("retired bit visible", lk_retired);
    lk_pc = 64'(4 * 3); #1 check("k=3 not retired", !lk_retired);
    // LRU bits now 1000 (k=4 refill touched way 3). Victim for k=5 is way 2 (k=3).
    fill(5, 1, ev); check("fill k=5 evicts", ev);
    look(3, 0, 0); look(1, 1, 0); look(2, 1, 0); look(4, 1, 0); look(5, 1, 0);
    // LRU 1100: no way is both non-retired and clear; first non-retired is way 2 (k=5).
    fill(6, 0, ev); check("fill k=6 evicts", ev);
    look(5, 0, 0); look(6, 1, 0); look(1, 1, 0); look(2, 1, 0);
    // Touch k=1 (way 0), then k=7 again replaces the non-retired way 2 (k=6).
    look(1, 1, 1);
    fill(7, 1, ev);
    look(6, 0, 0); look(7, 1, 0); look(4, 1, 0); look(1, 1, 0); look(2, 1, 0);
    // Retire everything: the victim is then a way whose LRU bit is clear.
    retire(7, h); retire(4, h);
    // LRU: the touch of k=1 gave 1101; k=7 refilled way 2, still 1101. Only
    // way 1 (k=2) has a clear LRU bit, so it is the victim.
    fill(8, 0, ev); check("fill k=8 evicts", ev);
    look(2, 0, 0); look(1, 1, 0); look(4, 1, 0); look(7, 1, 0); look(8, 1, 0);
    // Reset clears the table.
    @(negedge clk); rst_n = 0; @(negedge clk); rst_n = 1;
    look(2, 0, 0); look(8, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

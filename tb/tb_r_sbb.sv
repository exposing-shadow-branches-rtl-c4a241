// tb_r_sbb: checks the R-SBB's line-plus-offset matching and replacement.
//
// A 16-entry, 4-way instance (4 sets, indexed by cache line). Returns at two
// offsets of one line must both hit, a third offset of that line must miss,
// and the same offset in another line that maps to the same set must miss.
// Five returns in one set check that the retired entries survive the fifth
// fill and a non-retired one is evicted.
module tb_r_sbb;
  import skia_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lk_valid = 0, lk_hit, lk_ret_imm, lk_retired;
  addr_t lk_pc = '0;
  logic fill_valid = 0, fill_ret_imm = 0, fill_evict;
  addr_t fill_pc = '0;
  logic rt_valid = 0, rt_hit;
  addr_t rt_pc = '0;
  int checks = 0, failures = 0;

  r_sbb #(.ENTRIES(16), .WAYS(4)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // line L (a multiple of 4 lines keeps set 0), byte offset o
  function automatic addr_t ra(int line, int o); return 64'h7f00_0000_0000 + 64'(line) * 64 + 64'(o); endfunction

  task automatic fill(input addr_t pc, input logic imm, output logic ev);
    @(negedge clk); fill_valid = 1; fill_pc = pc; fill_ret_imm = imm;
    #1 ev = fill_evict;
    @(posedge clk); #1 fill_valid = 0;
  endtask

  task automatic look(input addr_t pc, input logic exp_hit, input logic exp_imm);
    @(negedge clk); lk_valid = 1; lk_pc = pc; #1;
    check($sformatf("lookup %h hit=%b expected %b", pc, lk_hit, exp_hit), lk_hit == exp_hit);
    if (exp_hit && lk_hit) check($sformatf("lookup %h type", pc), lk_ret_imm == exp_imm);
    @(posedge clk); #1 lk_valid = 0;
  endtask

  task automatic retire(input addr_t pc, input logic exp_hit);
    @(negedge clk); rt_valid = 1; rt_pc = pc; #1;
    check($sformatf("retire %h", pc), rt_hit == exp_hit);
    @(posedge clk); #1 rt_valid = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic ev;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fill(ra(0, 12), 0, ev); check("first fill evicts nothing", !ev);
    fill(ra(0, 40), 1, ev); check("second fill evicts nothing", !ev);
    look(ra(0, 12), 1, 0);
    look(ra(0, 40), 1, 1);
    look(ra(0, 13), 0, 0);
    look(ra(4, 12), 0, 0);     // same set, other line
    look(ra(1, 12), 0, 0);     // other set
    fill(ra(4, 63), 0, ev);
    fill(ra(8, 0), 0, ev);
    look(ra(4, 63), 1, 0);
    look(ra(8, 0), 1, 0);
    retire(ra(0, 12), 1);
    retire(ra(8, 0), 1);
    retire(ra(8, 1), 0);
    // LRU bits of set 0: fills of ways 0..3 end at 1000, the lookups of ways
    // 2 and 3 give 1100. Way 0 is retired, so the first way that is neither
    // retired nor recently used is way 1, holding ra(0,40).
    fill(ra(12, 5), 0, ev); check("fifth fill evicts", ev);
    look(ra(0, 40), 0, 0);
    look(ra(0, 12), 1, 0);
    look(ra(8, 0), 1, 0);
    look(ra(4, 63), 1, 0);
    look(ra(12, 5), 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ras: checks the return address stack against a queue-based model.
//
// Random pushes, pops and push+pop pairs on an 8-deep stack; the model is a
// SystemVerilog queue that drops its oldest element past 8 entries, as the
// circular stack overwrites its oldest entry. After each clock the top entry
// and top_valid are compared with the model, and overflow is checked.
module tb_ras;
  import skia_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, top_valid, overflow;
  addr_t push_addr = '0, top_addr;
  addr_t model [$];
  int checks = 0, failures = 0, n_over = 0;

  ras #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    check("empty after reset", !top_valid);
    for (int i = 0; i < 2000; i++) begin
      int r;
      logic exp_over;
      @(negedge clk);
      r = $urandom_range(0, 9);
      // Bias towards pushes in the first half to reach overflow.
      push = (i < 1000) ? (r < 6) : (r < 4);
      pop  = (r >= 3 && r < 5) || r >= 8;
      push_addr = {$urandom, $urandom};
      #1 exp_over = push && !pop && model.size() == D;
      check("overflow flag", overflow == exp_over);
      if (overflow) n_over++;
      if (push && pop) begin
        if (model.size() > 0) void'(model.pop_back());
        model.push_back(push_addr);
      end else if (push) begin
        model.push_back(push_addr);
        if (model.size() > D) void'(model.pop_front());
      end else if (pop) begin
        if (model.size() > 0) void'(model.pop_back());
      end
      @(posedge clk); #1;
      check("top_valid", top_valid == (model.size() > 0));
      if (model.size() > 0) check($sformatf("top entry %0d", i), top_addr == model[$]);
    end
    check("overflow happened", n_over > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

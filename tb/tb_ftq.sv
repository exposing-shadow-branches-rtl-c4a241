// tb_ftq: checks the fetch target queue at its full depth of 24.
//
// Fills the queue until enqueue is refused, checks that exactly 24 entries
// were taken, that each accepted entry produced a prefetch of its start line
// one cycle later, and that entries come out in order. Then random
// enqueue/dequeue traffic is compared with a queue model, and a flush must
// empty the queue in one cycle.
module tb_ftq;
  import skia_pkg::*;
  localparam int D = 24;
  logic clk = 0, rst_n = 0, flush = 0;
  logic enq_valid = 0, enq_ready, deq_valid, deq_ready = 0, pf_valid;
  ftq_entry_t enq_entry, deq_entry;
  addr_t pf_line;
  logic [$clog2(D):0] occupancy;
  ftq_entry_t model [$];
  int checks = 0, failures = 0, seq = 0, accepted = 0;

  ftq #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic ftq_entry_t mk(int n);
    ftq_entry_t e;
    e.start_pc = 64'h40_0000 + 64'(n) * 64'd100;
    e.exit_pc  = e.start_pc + 64'd17;
    e.taken    = n[0];
    e.target   = 64'h80_0000 + 64'(n);
    return e;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enq_entry = mk(0);
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // Fill until full.
    for (int i = 0; i < 30; i++) begin
      logic took;
      @(negedge clk);
      enq_valid = 1; enq_entry = mk(seq);
      took = enq_ready;
      @(posedge clk); #1;
      check("prefetch follows each accepted entry", pf_valid == took);
      if (took) begin
        check("prefetch line", pf_line == line_base(mk(seq).start_pc));
        model.push_back(mk(seq)); seq++; accepted++;
      end
    end
    enq_valid = 0;
    check($sformatf("queue took %0d entries", accepted), accepted == D);
    check("occupancy at full", int'(occupancy) == D);
    // Random traffic against the model.
    for (int i = 0; i < 600; i++) begin
      logic e, d;
      @(negedge clk);
      enq_valid = ($urandom_range(0, 1) == 1); enq_entry = mk(seq);
      deq_ready = ($urandom_range(0, 1) == 1);
      #1;
      check("deq_valid", deq_valid == (model.size() > 0));
      if (deq_valid) check("deq order", deq_entry == model[0]);
      check("enq_ready", enq_ready == (model.size() < D));
      e = enq_valid && enq_ready; d = deq_valid && deq_ready;
      @(posedge clk); #1;
      if (d) void'(model.pop_front());
      if (e) begin model.push_back(mk(seq)); seq++; end
    end
    // Flush.
    @(negedge clk); enq_valid = 0; deq_ready = 0; flush = 1;
    @(posedge clk); #1 flush = 0;
    check("flush empties", occupancy == 0 && !deq_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

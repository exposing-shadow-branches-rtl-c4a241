// ftq: Fetch Target Queue between the branch predictor and the fetch engine.
//
// A first-in first-out queue of predicted basic blocks (start address, address
// of the ending branch, taken flag, predicted target). The predictor enqueues,
// the fetch engine dequeues; a resteer flushes every entry. For each accepted
// entry the queue also sends a prefetch of the line holding the block's start
// to the L1-I, the fetch-directed prefetching that keeps lines in the cache
// ahead of fetch, and whose lines the shadow branch decoder later reads.
//
// From the paper: FIFO order, one entry per basic block, 24 entries,
// prefetch of the block's lines as it enters the queue. This design's
// choices: valid/ready handshakes on both sides (enqueue is refused when
// full, so the predictor stalls), a one-cycle flush on a resteer, a dequeue
// in the same cycle as a flush is dropped, only the start line is
// prefetched, and pf_* is registered (one cycle after the enqueue). The six
// low bits of pf_line are always zero: it is a line address.
module ftq
  import skia_pkg::*;
#(
  parameter int unsigned DEPTH = 24,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       flush,
  input  logic       enq_valid,
  output logic       enq_ready,
  input  ftq_entry_t enq_entry,
  output logic       deq_valid,
  input  logic       deq_ready,
  output ftq_entry_t deq_entry,
  output logic       pf_valid,
  output addr_t      pf_line,
  output logic [PTR_W:0] occupancy
);

  ftq_entry_t       mem_q [DEPTH];
  logic [PTR_W-1:0] head_q, tail_q;
  logic [PTR_W:0]   count_q;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  logic do_enq, do_deq;
  assign enq_ready = (int'(count_q) < DEPTH) && !flush;
  assign deq_valid = (count_q != '0) && !flush;
  assign deq_entry = mem_q[head_q];
  assign do_enq    = enq_valid && enq_ready;
  assign do_deq    = deq_valid && deq_ready;
  assign occupancy = count_q;

  always_ff @(posedge clk) begin
    if (do_enq) mem_q[tail_q] <= enq_entry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q <= '0; tail_q <= '0; count_q <= '0;
      pf_valid <= 1'b0; pf_line <= '0;
    end else begin
      pf_valid <= do_enq;
      if (do_enq) pf_line <= line_base(enq_entry.start_pc);
      if (flush) begin
        head_q <= '0; tail_q <= '0; count_q <= '0;
      end else begin
        if (do_enq) tail_q <= inc(tail_q);
        if (do_deq) head_q <= inc(head_q);
        count_q <= count_q + (PTR_W+1)'(do_enq) - (PTR_W+1)'(do_deq);
      end
    end
  end

  // The queue never holds more than DEPTH entries.
  assert property (@(posedge clk) disable iff (!rst_n) int'(count_q) <= DEPTH);

endmodule

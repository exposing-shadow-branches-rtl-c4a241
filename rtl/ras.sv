// ras: Return Address Stack of the branch prediction unit.
//
// A predicted call pushes its return address; a predicted return pops it.
// The top entry is the target supplied for a return, including a return that
// is known only from the R-SBB (the R-SBB stores where returns are, the RAS
// says where they go).
//
// The paper names the RAS as part of the BPU but gives no size or policy. This
// design's choices: DEPTH entries in a circular buffer, so an overflowing push
// overwrites the oldest entry; an occupancy counter (saturating at DEPTH)
// drives top_valid; a push and a pop in the same cycle replace the top entry (a plain push
// when the stack is empty).
// Push/pop take effect at the clock edge; top_* is the registered state.
module ras
  import skia_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  addr_t push_addr,
  input  logic  pop,
  output logic  top_valid,
  output addr_t top_addr,
  output logic  overflow       // a push overwrote a live entry this cycle
);

  addr_t             stack_q [DEPTH];
  logic [PTR_W-1:0]  tos_q;            // index of the top entry
  logic [PTR_W:0]    count_q;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction
  function automatic logic [PTR_W-1:0] dec(logic [PTR_W-1:0] p);
    return (p == '0) ? PTR_W'(DEPTH - 1) : p - 1'b1;
  endfunction

  assign top_valid = (count_q != '0);
  assign top_addr  = stack_q[tos_q];
  assign overflow  = push && !pop && (int'(count_q) == DEPTH);

  // A pop of an empty stack does nothing, so push+pop on an empty stack is a
  // plain push.
  logic replace;
  assign replace = push && pop && (count_q != '0);

  always_ff @(posedge clk) begin
    if (replace)   stack_q[tos_q]      <= push_addr;
    else if (push) stack_q[inc(tos_q)] <= push_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tos_q   <= '0;
      count_q <= '0;
    end else if (push && !replace) begin
      tos_q <= inc(tos_q);
      if (int'(count_q) < DEPTH) count_q <= count_q + 1'b1;
    end else if (pop && !push && count_q != '0) begin
      tos_q   <= dec(tos_q);
      count_q <= count_q - 1'b1;
    end
  end

endmodule

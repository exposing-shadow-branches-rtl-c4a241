// sa_table: set-associative tag/data table shared by the BTB, U-SBB and R-SBB.
//
// Each entry holds a tag, a valid bit, one LRU bit and, when HAS_RETIRED is
// set, a "retired" bit, plus DATA_W bits of payload. The caller computes the
// set index and the tag from the address, so the three tables can index
// differently (the R-SBB keeps the line offset as part of its tag).
//
// Ports, all synchronous to clk, active-low asynchronous reset of the valid,
// LRU and retired bits:
//   lookup  lk_valid/lk_set/lk_tag -> lk_hit/lk_data in the same cycle
//           (combinational read); a hit marks the way recently used.
//   insert  ins_valid/ins_set/ins_tag/ins_data: overwrites the payload of a
//           matching entry, otherwise fills a victim way; ins_evict tells
//           whether a valid entry was pushed out (same cycle, combinational).
//   retire  rt_valid/rt_set/rt_tag: sets the retired bit of a matching entry.
//
// Replacement: the paper specifies LRU with one LRU bit per way, and says
// entries whose target was committed get a "Retired" bit so that bogus
// branches are evicted first. The one-bit-per-way LRU is implemented as the
// usual "MRU bit" scheme (a use sets the way's bit; when all bits of the set
// would be set, the others are cleared). Victim order, this design's choice:
// an invalid way, else a non-retired way with a clear LRU bit, else any
// non-retired way, else a way with a clear LRU bit. When an insert and a
// lookup hit fall in the same set in one cycle, the insert's LRU update wins.
module sa_table #(
  parameter int unsigned SETS        = 64,
  parameter int unsigned WAYS        = 4,
  parameter int unsigned TAG_BITS    = 10,
  parameter int unsigned DATA_W      = 8,
  parameter bit          HAS_RETIRED = 1'b1,
  localparam int unsigned SET_W      = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAY_W      = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // lookup
  input  logic                lk_valid,
  input  logic [SET_W-1:0]    lk_set,
  input  logic [TAG_BITS-1:0] lk_tag,
  output logic                lk_hit,
  output logic [WAY_W-1:0]    lk_way,
  output logic [DATA_W-1:0]   lk_data,
  output logic                lk_retired,
  // insert
  input  logic                ins_valid,
  input  logic [SET_W-1:0]    ins_set,
  input  logic [TAG_BITS-1:0] ins_tag,
  input  logic [DATA_W-1:0]   ins_data,
  output logic                ins_evict,
  // retire
  input  logic                rt_valid,
  input  logic [SET_W-1:0]    rt_set,
  input  logic [TAG_BITS-1:0] rt_tag,
  output logic                rt_hit
);

  logic [TAG_BITS-1:0] tag_q  [SETS][WAYS];
  logic [DATA_W-1:0]   data_q [SETS][WAYS];
  logic [WAYS-1:0]     vld_q  [SETS];
  logic [WAYS-1:0]     lru_q  [SETS];
  logic [WAYS-1:0]     ret_q  [SETS];

  // MRU-bit update of one set's LRU vector for a use of way w.
  function automatic logic [WAYS-1:0] touch(logic [WAYS-1:0] cur, logic [WAY_W-1:0] w);
    logic [WAYS-1:0] nxt;
    nxt = cur;
    nxt[w] = 1'b1;
    if (&nxt) begin
      nxt = '0;
      nxt[w] = 1'b1;
    end
    return nxt;
  endfunction

  // ---- lookup --------------------------------------------------------------
  always_comb begin
    lk_hit = 1'b0; lk_way = '0; lk_data = '0; lk_retired = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (!lk_hit && vld_q[lk_set][w] && tag_q[lk_set][w] == lk_tag) begin
        lk_hit     = 1'b1;
        lk_way     = WAY_W'(w);
        lk_data    = data_q[lk_set][w];
        lk_retired = HAS_RETIRED && ret_q[lk_set][w];
      end
    end
  end

  // ---- insert: matching way or victim -------------------------------------
  logic             ins_match;
  logic [WAY_W-1:0] ins_way;

  always_comb begin
    logic found;
    ins_match = 1'b0; ins_way = '0; found = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (!ins_match && vld_q[ins_set][w] && tag_q[ins_set][w] == ins_tag) begin
        ins_match = 1'b1;
        ins_way   = WAY_W'(w);
      end
    end
    if (!ins_match) begin
      for (int w = 0; w < WAYS; w++)
        if (!found && !vld_q[ins_set][w]) begin found = 1'b1; ins_way = WAY_W'(w); end
      for (int w = 0; w < WAYS; w++)
        if (!found && !(HAS_RETIRED && ret_q[ins_set][w]) && !lru_q[ins_set][w]) begin
          found = 1'b1; ins_way = WAY_W'(w);
        end
      for (int w = 0; w < WAYS; w++)
        if (!found && !(HAS_RETIRED && ret_q[ins_set][w])) begin found = 1'b1; ins_way = WAY_W'(w); end
      for (int w = 0; w < WAYS; w++)
        if (!found && !lru_q[ins_set][w]) begin found = 1'b1; ins_way = WAY_W'(w); end
    end
    ins_evict = ins_valid && !ins_match && vld_q[ins_set][ins_way];
  end

  // ---- retire ---------------------------------------------------------------
  logic [WAY_W-1:0] rt_way;
  always_comb begin
    rt_hit = 1'b0; rt_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!rt_hit && vld_q[rt_set][w] && tag_q[rt_set][w] == rt_tag) begin
        rt_hit = 1'b1;
        rt_way = WAY_W'(w);
      end
    end
  end

  // ---- state ----------------------------------------------------------------
  // Tags and payloads need no reset: they are read only under a valid bit.
  always_ff @(posedge clk) begin
    if (ins_valid) begin
      tag_q[ins_set][ins_way]  <= ins_tag;
      data_q[ins_set][ins_way] <= ins_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld_q[s] <= '0;
        lru_q[s] <= '0;
        ret_q[s] <= '0;
      end
    end else begin
      if (lk_valid && lk_hit && !(ins_valid && ins_set == lk_set))
        lru_q[lk_set] <= touch(lru_q[lk_set], lk_way);
      if (HAS_RETIRED && rt_valid && rt_hit && !(ins_valid && ins_set == rt_set && !ins_match))
        ret_q[rt_set][rt_way] <= 1'b1;
      if (ins_valid) begin
        vld_q[ins_set][ins_way] <= 1'b1;
        lru_q[ins_set]          <= touch(lru_q[ins_set], ins_way);
        if (!ins_match) ret_q[ins_set][ins_way] <= 1'b0;
      end
    end
  end

endmodule

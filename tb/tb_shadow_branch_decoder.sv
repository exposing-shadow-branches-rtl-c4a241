// tb_shadow_branch_decoder: checks head and tail shadow branch decoding.
//
// Directed lines, with the expected fills worked out by hand:
//   A  a head region "31 C3 4D 85 E4 75 30" before an entry at byte 7 has
//      five valid paths (starts 0, 1, 2, 3, 5); the first path (xor, test,
//      jne) holds no jump/call/return, and the bogus "ret" at byte 1 must not
//      be emitted. The tail after a "ret" exit at byte 15 holds a jmp rel32,
//      a call rel32, a ret, a jl (not emitted) and a jmp rel8.
//   B  a head region ending "49 8B F3 66 90 E8 58 59 FB FF" before an entry at
//      byte 24, preceded by a movabs whose immediate bytes are invalid
//      opcodes: five valid starts (0, 10, 11, 13, 14), the call at byte 19 is
//      emitted with target 24 + 0xFFFB5958 (sign-extended).
//   C  the same line with a one-byte nop at byte 9: a sixth valid start, so
//      the line is discarded and nothing is emitted.
// Then random lines built from a list of real x86-64 instructions, with
// random entry and exit offsets, are compared with a reference model that
// walks every candidate path forward, as the paper describes, using a
// separate length decoder instance for the lengths. The number of cycles from
// request to `done` is checked against the block's stated timing.
module tb_shadow_branch_decoder;
  import skia_pkg::*;

  logic clk = 0, rst_n = 0;
  logic req_valid = 0, ready, req_head_en = 0, req_tail_en = 0;
  line_t req_line = '0;
  addr_t req_base = '0;
  off_t req_entry = '0, req_exit = '0;
  logic fill_valid, head_discard, done;
  sbb_fill_t fill;
  logic [6:0] head_paths;
  int checks = 0, failures = 0;
  int n_head_fill = 0, n_tail_fill = 0, n_discard = 0;

  shadow_branch_decoder dut (.*);
  always #5 clk = ~clk;

  // Reference length decoder for the model.
  line_t       m_line;
  off_t        m_pos;
  len_t        m_len;
  insn_kind_e  m_kind;
  logic [31:0] m_disp;
  logic        m_ri;
  x86_length_decoder ref_ld (.line(m_line), .pos(m_pos), .len(m_len), .kind(m_kind),
                             .disp(m_disp), .ret_imm(m_ri));

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Collect fills.
  sbb_fill_t got [$];
  always @(posedge clk) if (rst_n && fill_valid) got.push_back(fill);

  // Run one request; returns the cycle count from acceptance to done.
  task automatic run(input line_t l, input addr_t base, input logic he, input int entry,
                     input logic te, input int ex, output int cycles);
    got.delete();
    @(negedge clk);
    check("ready before a request", ready);
    req_valid = 1; req_line = l; req_base = base; req_head_en = he;
    req_entry = off_t'(entry); req_tail_en = te; req_exit = off_t'(ex);
    @(posedge clk); #1 req_valid = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); #1 cycles++; end
    @(posedge clk); #1;   // the last fill is registered with done
  endtask

  function automatic line_t bytes_to_line(logic [7:0] b [64]);
    line_t l;
    for (int k = 0; k < 64; k++) l[8*k +: 8] = b[k];
    return l;
  endfunction

  // ---- reference model ------------------------------------------------------
  typedef struct { int len; insn_kind_e kind; logic [31:0] disp; logic ri; } dec_t;

  task automatic mdec(input line_t l, input int p, output dec_t d);
    m_line = l; m_pos = off_t'(p); #1;
    d.len = m_len; d.kind = m_kind; d.disp = m_disp; d.ri = m_ri;
  endtask

  function automatic logic supported(insn_kind_e k);
    return k inside {INSN_JMP_REL, INSN_CALL_REL, INSN_RET};
  endfunction

  function automatic sbb_fill_t mkfill(addr_t base, int p, dec_t d, logic head);
    sbb_fill_t f;
    f.is_ret = (d.kind == INSN_RET); f.is_call = (d.kind == INSN_CALL_REL);
    f.ret_imm = d.ri; f.head = head; f.pc = base + 64'(p);
    f.target = (d.kind == INSN_RET) ? '0
             : base + 64'(p) + 64'(d.len) + {{32{d.disp[31]}}, d.disp};
    return f;
  endfunction

  task automatic model(input line_t l, input addr_t base, input logic he, input int entry,
                       input logic te, input int ex, output sbb_fill_t exp [$],
                       output int exp_paths, output logic exp_discard, output int exp_cycles);
    dec_t d;
    int first, nvalid, h, t;
    exp.delete(); exp_paths = 0; exp_discard = 0;
    exp_cycles = 1;
    if (he && entry != 0) begin
      first = -1; nvalid = 0; h = 0;
      for (int s = 0; s < 15 && s < entry; s++) begin
        int p = s;
        logic ok = 0;
        forever begin
          if (p == entry) begin ok = 1; break; end
          if (p > entry) break;
          mdec(l, p, d);
          if (d.len == 0) break;
          p += d.len;
        end
        if (ok) begin nvalid++; if (first < 0) first = s; end
      end
      exp_paths = nvalid;
      exp_cycles += 2 * entry + 1;
      if (nvalid >= 6) exp_discard = 1;
      else if (first >= 0) begin
        int p = first;
        while (p < entry) begin
          mdec(l, p, d); h++;
          if (supported(d.kind)) exp.push_back(mkfill(base, p, d, 1));
          p += d.len;
        end
        exp_cycles += h;
      end
    end
    if (te) begin
      int p = ex;
      t = 0;
      mdec(l, p, d);
      exp_cycles += 1;
      if (d.len != 0 && p + d.len < 64) begin
        p += d.len;
        forever begin
          mdec(l, p, d); t++;
          if (d.len != 0 && supported(d.kind)) exp.push_back(mkfill(base, p, d, 0));
          if (d.len == 0 || p + d.len >= 64) break;
          p += d.len;
        end
      end
      exp_cycles += t;
    end
  endtask

  task automatic compare(input string name, input line_t l, input addr_t base, input logic he,
                         input int entry, input logic te, input int ex);
    sbb_fill_t exp [$];
    int ep, ec, cyc;
    logic edisc;
    logic saw_discard;
    model(l, base, he, entry, te, ex, exp, ep, edisc, ec);
    fork
      run(l, base, he, entry, te, ex, cyc);
      begin
        saw_discard = 0;
        repeat (400) begin @(posedge clk); #1 if (head_discard) saw_discard = 1; end
      end
    join_any
    disable fork;
    check($sformatf("%s: fill count %0d expected %0d", name, got.size(), exp.size()),
          got.size() == exp.size());
    for (int i = 0; i < exp.size() && i < got.size(); i++)
      check($sformatf("%s: fill %0d", name, i), got[i] == exp[i]);
    check($sformatf("%s: cycles %0d expected %0d", name, cyc, ec), cyc == ec);
    if (he && entry != 0) begin
      check($sformatf("%s: paths %0d expected %0d", name, head_paths, ep), int'(head_paths) == ep);
      check($sformatf("%s: discard", name), saw_discard == edisc);
    end
    foreach (got[i]) if (got[i].head) n_head_fill++; else n_tail_fill++;
    if (edisc) n_discard++;
  endtask

  // ---- random line builder -------------------------------------------------------
  typedef logic [7:0] bytes_t [$];
  bytes_t lib [$];
  // n bytes, the first one leftmost in v
  task automatic lib_add(input int n, input logic [8*15-1:0] v);
    bytes_t q;
    for (int j = 0; j < n; j++) q.push_back(v[8*(n-1-j) +: 8]);
    lib.push_back(q);
  endtask

  initial begin
    logic [7:0] b [64];
    line_t la, lb, lc;
    addr_t base;
    int cyc;

    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // ---- line A ----
    foreach (b[i]) b[i] = 8'h90;
    {b[0], b[1], b[2], b[3], b[4], b[5], b[6]} = {8'h31, 8'hC3, 8'h4D, 8'h85, 8'hE4, 8'h75, 8'h30};
    {b[7], b[8], b[9], b[10], b[11], b[12], b[13], b[14], b[15]} =
      {8'h48, 8'h83, 8'hC4, 8'h10, 8'h5B, 8'h41, 8'h5C, 8'h5D, 8'hC3};
    {b[16], b[17], b[18], b[19], b[20]} = {8'hE9, 8'hDE, 8'hFC, 8'hFF, 8'hFF};
    {b[21], b[22], b[23], b[24], b[25]} = {8'hE8, 8'h58, 8'h59, 8'hFB, 8'hFF};
    b[26] = 8'hC3;
    {b[27], b[28], b[29], b[30]} = {8'h7C, 8'hAB, 8'hEB, 8'hB8};
    la = bytes_to_line(b);
    base = 64'h0000_7F12_3456_7880;
    run(la, base, 1, 7, 1, 15, cyc);
    check("A: five valid head paths", head_paths == 7'd5);
    check("A: four tail fills", got.size() == 4);
    if (got.size() == 4) begin
      check("A: jmp rel32", !got[0].is_ret && !got[0].is_call && !got[0].head &&
            got[0].pc == base + 16 && got[0].target == base + 21 - 64'h322);
      check("A: call rel32", got[1].is_call && got[1].pc == base + 21 &&
            got[1].target == base + 26 + 64'hFFFF_FFFF_FFFB_5958);
      check("A: ret", got[2].is_ret && !got[2].ret_imm && got[2].pc == base + 26);
      check("A: jmp rel8", !got[3].is_call && !got[3].is_ret && got[3].pc == base + 29 &&
            got[3].target == base + 31 - 64'h48);
    end
    // Cycles: 1 + 2*7 + 1 + 3 (head path xor, test, jne) + 1 + tail positions
    // 16, 21, 26, 27, 29 and the 33 one-byte nops at 31..63 = 38.
    check($sformatf("A: cycles %0d", cyc), cyc == 1 + 14 + 1 + 3 + 1 + 38);
    compare("A model", la, base, 1, 7, 1, 15);

    // ---- line B ----
    foreach (b[i]) b[i] = 8'h90;
    {b[0], b[1]} = {8'h48, 8'hB8};
    for (int k = 2; k < 10; k++) b[k] = 8'h06;
    {b[10], b[11], b[12], b[13]} = {8'h48, 8'h83, 8'hC4, 8'h10};
    {b[14], b[15], b[16], b[17], b[18]} = {8'h49, 8'h8B, 8'hF3, 8'h66, 8'h90};
    {b[19], b[20], b[21], b[22], b[23]} = {8'hE8, 8'h58, 8'h59, 8'hFB, 8'hFF};
    {b[24], b[25], b[26], b[27], b[28]} = {8'h4C, 8'h8B, 8'h54, 8'h24, 8'h08};
    lb = bytes_to_line(b);
    base = 64'h0000_0000_0040_1000;
    run(lb, base, 1, 24, 0, 0, cyc);
    check("B: five valid head paths", head_paths == 7'd5);
    check("B: one head fill", got.size() == 1);
    if (got.size() == 1)
      check("B: call at 19", got[0].head && got[0].is_call && got[0].pc == base + 19 &&
            got[0].target == base + 24 + 64'hFFFF_FFFF_FFFB_5958);
    // 1 + 2*24 + 1 + 5 head instructions = 55.
    check($sformatf("B: cycles %0d", cyc), cyc == 55);
    compare("B model", lb, base, 1, 24, 0, 0);

    // ---- line C: one more valid start -> discarded ----
    b[9] = 8'h90;
    lc = bytes_to_line(b);
    run(lc, base, 1, 24, 0, 0, cyc);
    check("C: six valid head paths", head_paths == 7'd6);
    check("C: nothing emitted", got.size() == 0);
    compare("C model", lc, base, 1, 24, 0, 0);

    // ---- random lines ----
    lib_add(2, {8'h31, 8'hC3}); lib_add(1, {8'hC3}); lib_add(3, {8'h4D, 8'h85, 8'hE4});
    lib_add(2, {8'h75, 8'h30}); lib_add(4, {8'h48, 8'h83, 8'hC4, 8'h10}); lib_add(1, {8'h5B});
    lib_add(2, {8'h41, 8'h5C}); lib_add(2, {8'hEB, 8'hB8}); lib_add(2, {8'h7C, 8'hAB});
    lib_add(5, {8'hE8, 8'h58, 8'h59, 8'hFB, 8'hFF}); lib_add(5, {8'hE9, 8'hDE, 8'hFC, 8'hFF, 8'hFF});
    lib_add(5, {8'h4C, 8'h8B, 8'h54, 8'h24, 8'h08}); lib_add(3, {8'h49, 8'h8B, 8'hF3});
    lib_add(2, {8'h66, 8'h90}); lib_add(3, {8'hC2, 8'h08, 8'h00}); lib_add(2, {8'hFF, 8'hE0});
    lib_add(10, {8'h48, 8'hB8, 8'h06, 8'h06, 8'h06, 8'h06, 8'h06, 8'h06, 8'h06, 8'h06});
    lib_add(7, {8'h8B, 8'h84, 8'h24, 8'h00, 8'h01, 8'h00, 8'h00});
    lib_add(6, {8'h0F, 8'h84, 8'h10, 8'h00, 8'h00, 8'h00});
    lib_add(5, {8'h48, 8'h89, 8'h5C, 8'h24, 8'h08});
    for (int iter = 0; iter < 300; iter++) begin
      line_t l;
      int n, k, entry, ex, starts [$];
      logic he, te;
      n = 0;
      starts.delete();
      // Start mid-instruction sometimes: a random prefix of 0..3 random bytes.
      repeat ($urandom_range(0, 3)) begin b[n] = 8'($urandom); n++; end
      while (n < 64) begin
        k = $urandom_range(0, lib.size() - 1);
        starts.push_back(n);
        for (int j = 0; j < lib[k].size(); j++) if (n < 64) begin b[n] = lib[k][j]; n++; end
      end
      l = bytes_to_line(b);
      base = {$urandom, $urandom} & ~64'h3F;
      he = ($urandom_range(0, 3) != 0);
      te = ($urandom_range(0, 3) != 0);
      entry = starts[$urandom_range(0, starts.size() - 1)];
      ex = starts[$urandom_range(0, starts.size() - 1)];
      if (ex < entry) ex = entry;
      compare($sformatf("random %0d", iter), l, base, he, entry, te, ex);
    end
    check("head fills happened", n_head_fill > 0);
    check("tail fills happened", n_tail_fill > 0);
    check("discards happened", n_discard > 0);
    $display("head fills %0d, tail fills %0d, discarded lines %0d", n_head_fill, n_tail_fill, n_discard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

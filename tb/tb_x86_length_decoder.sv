// tb_x86_length_decoder: checks the shadow decoder's x86-64 length decoder.
//
// A list of hand-assembled instructions (most taken from the byte examples of
// head and tail shadow regions: xor/ret/test/jne, sub/jl/jmp rel8, call rel32,
// jmp rel32, mov with SIB and displacement, ...) with their known length,
// class and displacement. Each is placed at several offsets of a line whose
// other bytes are random, and the decoder's answer is compared. Then an
// instruction is placed so that it runs past the line end, where the decoder
// must answer 0. The block is combinational; the clock only paces the test.
module tb_x86_length_decoder;
  import skia_pkg::*;

  line_t       line;
  off_t        pos;
  len_t        len;
  insn_kind_e  kind;
  logic [31:0] disp;
  logic        ret_imm;
  int checks = 0, failures = 0;

  x86_length_decoder dut (.line(line), .pos(pos), .len(len), .kind(kind),
                          .disp(disp), .ret_imm(ret_imm));

  typedef struct {
    logic [7:0]  b [15];
    int          n;        // bytes given
    int          exp_len;
    insn_kind_e  exp_kind;
    logic [31:0] exp_disp;
    logic        exp_ri;
  } vec_t;

  vec_t vecs [$];

  task automatic add(input logic [7:0] bytes [], input int exp_len,
                     input insn_kind_e k, input logic [31:0] d, input logic ri);
    vec_t v;
    foreach (v.b[i]) v.b[i] = 8'h90;
    foreach (bytes[i]) v.b[i] = bytes[i];
    v.n = bytes.size(); v.exp_len = exp_len; v.exp_kind = k;
    v.exp_disp = d; v.exp_ri = ri;
    vecs.push_back(v);
  endtask

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s: pos=%0d len=%0d kind=%s disp=%h ri=%b", what, pos, len,
               kind.name(), disp, ret_imm);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    add('{8'h31, 8'hC3}, 2, INSN_OTHER, 0, 0);                          // xor ebx,eax
    add('{8'hC3}, 1, INSN_RET, 0, 0);                                   // ret
    add('{8'h4D, 8'h85, 8'hE4}, 3, INSN_OTHER, 0, 0);                   // test r12,r12
    add('{8'h75, 8'h30}, 2, INSN_COND, 0, 0);                           // jne +0x30
    add('{8'h48, 8'h83, 8'hC4, 8'h10}, 4, INSN_OTHER, 0, 0);            // add rsp,16
    add('{8'h5B}, 1, INSN_OTHER, 0, 0);                                 // pop rbx
    add('{8'h41, 8'h5C}, 2, INSN_OTHER, 0, 0);                          // pop r12
    add('{8'h48, 8'h83, 8'hEA, 8'h04}, 4, INSN_OTHER, 0, 0);            // sub rdx,4
    add('{8'h7C, 8'hAB}, 2, INSN_COND, 0, 0);                           // jl
    add('{8'hEB, 8'hB8}, 2, INSN_JMP_REL, 32'hFFFF_FFB8, 0);            // jmp rel8
    add('{8'hE8, 8'h58, 8'h59, 8'hFB, 8'hFF}, 5, INSN_CALL_REL, 32'hFFFB_5958, 0);
    add('{8'hE9, 8'hDE, 8'hFC, 8'hFF, 8'hFF}, 5, INSN_JMP_REL, 32'hFFFF_FCDE, 0);
    add('{8'hE9, 8'hF9, 8'h03, 8'h00, 8'h00}, 5, INSN_JMP_REL, 32'h0000_03F9, 0);
    add('{8'h4C, 8'h8B, 8'h54, 8'h24, 8'h08}, 5, INSN_OTHER, 0, 0);     // mov r10,[rsp+8]
    add('{8'h49, 8'h8B, 8'hF3}, 3, INSN_OTHER, 0, 0);                   // mov rsi,r11
    add('{8'h66, 8'h90}, 2, INSN_OTHER, 0, 0);                          // xchg ax,ax
    add('{8'h45, 8'h3B, 8'hD8}, 3, INSN_OTHER, 0, 0);                   // cmp r11d,r8d
    add('{8'h00, 8'h00}, 2, INSN_OTHER, 0, 0);                          // add [rax],al
    add('{8'hC2, 8'h08, 8'h00}, 3, INSN_RET, 0, 1);                     // ret 8
    add('{8'h48, 8'hB8, 8'h01, 8'h02, 8'h03, 8'h04, 8'h05, 8'h06, 8'h07, 8'h08},
        10, INSN_OTHER, 0, 0);                                          // movabs rax
    add('{8'h0F, 8'h84, 8'h10, 8'h00, 8'h00, 8'h00}, 6, INSN_COND, 0, 0); // je rel32
    add('{8'hFF, 8'hE0}, 2, INSN_INDIRECT, 0, 0);                       // jmp rax
    add('{8'hFF, 8'h15, 8'h00, 8'h01, 8'h00, 8'h00}, 6, INSN_INDIRECT, 0, 0); // call [rip+]
    add('{8'hFF, 8'hC0}, 2, INSN_OTHER, 0, 0);                          // inc eax
    add('{8'h8B, 8'h04, 8'h25, 8'h00, 8'h10, 8'h00, 8'h00}, 7, INSN_OTHER, 0, 0);
    add('{8'h8B, 8'h84, 8'h24, 8'h00, 8'h01, 8'h00, 8'h00}, 7, INSN_OTHER, 0, 0);
    add('{8'hF7, 8'hC0, 8'h01, 8'h00, 8'h00, 8'h00}, 6, INSN_OTHER, 0, 0); // test eax,1
    add('{8'hF7, 8'hD8}, 2, INSN_OTHER, 0, 0);                          // neg eax
    add('{8'h66, 8'h0F, 8'h3A, 8'h0F, 8'hC1, 8'h08}, 6, INSN_OTHER, 0, 0); // palignr
    add('{8'h0F, 8'h1F, 8'h44, 8'h00, 8'h00}, 5, INSN_OTHER, 0, 0);     // nop [rax+rax]
    add('{8'h0F, 8'h05}, 2, INSN_OTHER, 0, 0);                          // syscall
    add('{8'h66, 8'h81, 8'hF9, 8'h34, 8'h12}, 5, INSN_OTHER, 0, 0);     // cmp cx,0x1234
    add('{8'hE3, 8'h05}, 2, INSN_COND, 0, 0);                           // jrcxz
    add('{8'h06}, 0, INSN_OTHER, 0, 0);                                 // invalid in 64-bit
    add('{8'hC4, 8'hE2, 8'h79}, 0, INSN_OTHER, 0, 0);                   // VEX: not decoded

    foreach (vecs[i]) begin
      for (int rep = 0; rep < 6; rep++) begin
        int at;
        for (int k = 0; k < LINE_BYTES; k++) line[8*k +: 8] = 8'($urandom);
        at = (rep == 0) ? 0 : $urandom_range(0, LINE_BYTES - 15);
        for (int k = 0; k < 15; k++) line[8*(at+k) +: 8] = vecs[i].b[k];
        pos = off_t'(at);
        #10;
        check($sformatf("vector %0d len", i), int'(len) == vecs[i].exp_len);
        if (vecs[i].exp_len != 0) begin
          check($sformatf("vector %0d kind", i), kind == vecs[i].exp_kind);
          if (vecs[i].exp_kind inside {INSN_JMP_REL, INSN_CALL_REL})
            check($sformatf("vector %0d disp", i), disp == vecs[i].exp_disp);
          if (vecs[i].exp_kind == INSN_RET)
            check($sformatf("vector %0d ret_imm", i), ret_imm == vecs[i].exp_ri);
        end
      end
    end

    // An instruction cut off by the end of the line does not decode.
    for (int k = 0; k < LINE_BYTES; k++) line[8*k +: 8] = 8'h90;
    line[8*60 +: 8] = 8'hE9;
    pos = 6'd60; #10;
    check("rel32 jump crossing the line end", len == 0);
    line[8*62 +: 16] = 16'hB8EB;                 // EB B8 at bytes 62, 63
    pos = 6'd62; #10;
    check("rel8 jump ending on the last byte", len == 2 && kind == INSN_JMP_REL);
    pos = 6'd63; #10;
    check("mov eax,imm32 crossing the line end", len == 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

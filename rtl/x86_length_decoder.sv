// x86_length_decoder: length and branch class of one x86-64 instruction.
//
// The shadow branch decoder needs only two things from an instruction: where
// it ends and whether it is a branch whose target can be computed without
// register state. This block answers both for the instruction that would
// start at byte `pos` of a 64-byte cache line. It is purely combinational.
//
// How it works: up to 14 legacy prefixes (26 2E 36 3E 64 65 66 67 F0 F2 F3)
// and REX bytes (40-4F) are skipped; the opcode (one byte, 0F xx, 0F 38 xx or
// 0F 3A xx) selects whether a ModRM byte follows and how many immediate bytes;
// the ModRM/SIB bytes add the displacement size. The result is the sum.
// An opcode that is invalid in 64-bit mode (06, 07, 0E, 16, 17, 1E, 1F, 27,
// 2F, 37, 3F, 60-62, 82, 9A, C4, C5, CE, D4-D6, EA and a few 0F xx), an
// instruction longer than 15 bytes, or one that runs past the end of the line
// gives len = 0, "no instruction starts here", as in the paper's Length vector.
//
// Interface: line (byte k at bits 8k+7:8k), pos -> len (0..15), kind,
// disp (sign-extended rel8/rel32 of a direct branch), ret_imm (C2 return).
//
// The paper asks for a "highly simplified decoder focused solely on
// identifying instruction boundaries and decoding supported branch
// instructions" and does not give its insides; the opcode tables here are this
// design's own, written from the x86-64 encoding rules. VEX/EVEX (C4, C5, 62)
// and 3DNow! (0F 0F) encodings are not decoded (len = 0).
module x86_length_decoder
  import skia_pkg::*;
(
  input  line_t      line,
  input  off_t       pos,
  output len_t       len,
  output insn_kind_e kind,
  output logic [31:0] disp,
  output logic       ret_imm
);

  localparam int unsigned WIN = MAX_INSN;  // bytes looked at

  logic [7:0] win   [WIN];   // bytes pos .. pos+14
  logic       avail [WIN];   // byte lies inside the line

  always_comb begin
    for (int k = 0; k < WIN; k++) begin
      avail[k] = (int'(pos) + k) < int'(LINE_BYTES);
      win[k]   = avail[k] ? line[8*((int'(pos) + k) % LINE_BYTES) +: 8] : 8'h00;
    end
  end

  // ---- opcode property tables ------------------------------------------
  // One-byte map: needs ModRM?
  function automatic logic op1_modrm(logic [7:0] op);
    if (op < 8'h40) return (op[2] == 1'b0);                 // ALU r/m forms
    case (op)
      8'h63, 8'h69, 8'h6B, 8'h80, 8'h81, 8'h83,
      8'hC0, 8'hC1, 8'hC6, 8'hC7, 8'hD0, 8'hD1, 8'hD2, 8'hD3,
      8'hF6, 8'hF7, 8'hFE, 8'hFF:                 return 1'b1;
      default: return (op >= 8'h84 && op <= 8'h8F) || (op >= 8'hD8 && op <= 8'hDF);
    endcase
  endfunction

  // One-byte map: immediate size. osz = 66 prefix seen, rexw = REX.W.
  function automatic int op1_imm(logic [7:0] op, logic osz, logic rexw, logic asz);
    int iz;
    iz = osz ? 2 : 4;
    if (op < 8'h40) begin
      if (op[2:0] == 3'd4) return 1;                        // AL, Ib
      if (op[2:0] == 3'd5) return iz;                       // eAX, Iz
      return 0;
    end
    if (op >= 8'h70 && op <= 8'h7F) return 1;               // Jcc rel8
    if (op >= 8'hB0 && op <= 8'hB7) return 1;               // MOV r8, Ib
    if (op >= 8'hB8 && op <= 8'hBF) return rexw ? 8 : iz;   // MOV r, Iv
    if (op >= 8'hE0 && op <= 8'hE7) return 1;               // LOOP/JrCXZ/IN/OUT
    if (op >= 8'hA0 && op <= 8'hA3) return asz ? 4 : 8;     // MOV moffs
    case (op)
      8'h68, 8'h69, 8'h81, 8'hA9, 8'hC7: return iz;
      8'h6A, 8'h6B, 8'h80, 8'h83, 8'hA8,
      8'hC0, 8'hC1, 8'hC6, 8'hCD, 8'hEB: return 1;
      8'hC2, 8'hCA:                      return 2;
      8'hC8:                             return 3;
      8'hE8, 8'hE9:                      return 4;          // rel32 in 64-bit mode
      default:                           return 0;
    endcase
  endfunction

  function automatic logic op1_invalid(logic [7:0] op);
    case (op)
      8'h06, 8'h07, 8'h0E, 8'h16, 8'h17, 8'h1E, 8'h1F, 8'h27, 8'h2F,
      8'h37, 8'h3F, 8'h60, 8'h61, 8'h62, 8'h82, 8'h9A, 8'hC4, 8'hC5,
      8'hCE, 8'hD4, 8'hD5, 8'hD6, 8'hEA: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  // Two-byte map (0F xx).
  function automatic logic op2_invalid(logic [7:0] op);
    case (op)
      8'h04, 8'h0A, 8'h0C, 8'h0F, 8'h36, 8'h39, 8'h3B, 8'h3C, 8'h3D,
      8'h3E, 8'h3F, 8'h7A, 8'h7B, 8'hA6, 8'hA7: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic op2_modrm(logic [7:0] op);
    if (op >= 8'h80 && op <= 8'h8F) return 1'b0;           // Jcc rel32
    if (op >= 8'hC8 && op <= 8'hCF) return 1'b0;           // BSWAP
    if (op >= 8'h30 && op <= 8'h37) return 1'b0;           // WRMSR..GETSEC
    case (op)
      8'h05, 8'h06, 8'h07, 8'h08, 8'h09, 8'h0B, 8'h0E, 8'h77,
      8'hA0, 8'hA1, 8'hA2, 8'hA8, 8'hA9, 8'hAA: return 1'b0;
      default: return 1'b1;
    endcase
  endfunction

  function automatic int op2_imm(logic [7:0] op);
    if (op >= 8'h80 && op <= 8'h8F) return 4;              // Jcc rel32
    if (op >= 8'h70 && op <= 8'h73) return 1;
    case (op)
      8'hA4, 8'hAC, 8'hBA, 8'hC2, 8'hC4, 8'hC5, 8'hC6: return 1;
      default: return 0;
    endcase
  endfunction

  function automatic logic is_legacy_prefix(logic [7:0] b);
    case (b)
      8'h26, 8'h2E, 8'h36, 8'h3E, 8'h64, 8'h65,
      8'h66, 8'h67, 8'hF0, 8'hF2, 8'hF3: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  // ---- the decode itself --------------------------------------------------
  always_comb begin
    int         p;          // bytes consumed so far
    int         total;
    logic       osz, asz, rexw, bad, has_modrm, prefix_run;
    int         imm;
    logic [7:0] op, op2, modrm, sib;
    logic [1:0] map;        // 0: one-byte, 1: 0F, 2: 0F38, 3: 0F3A
    int         opc_at;     // offset of the final opcode byte

    p = 0; osz = 1'b0; asz = 1'b0; rexw = 1'b0; bad = 1'b0;
    prefix_run = 1'b1;
    // Prefixes: legacy prefixes and REX; a REX byte counts only when it is
    // the last prefix, so it is cleared by any legacy prefix after it.
    for (int k = 0; k < WIN - 1; k++) begin
      if (prefix_run) begin
        if (is_legacy_prefix(win[k])) begin
          if (win[k] == 8'h66) osz = 1'b1;
          if (win[k] == 8'h67) asz = 1'b1;
          rexw = 1'b0;
          p = k + 1;
        end else if (win[k][7:4] == 4'h4) begin
          rexw = win[k][3];
          p = k + 1;
        end else begin
          prefix_run = 1'b0;
        end
      end
    end
    if (prefix_run) bad = 1'b1;                 // nothing but prefixes

    op  = win[p % WIN];
    op2 = win[(p + 1) % WIN];
    map = 2'd0;
    opc_at = p;
    if (op == 8'h0F) begin
      if (op2 == 8'h38)      begin map = 2'd2; opc_at = p + 2; end
      else if (op2 == 8'h3A) begin map = 2'd3; opc_at = p + 2; end
      else                   begin map = 2'd1; opc_at = p + 1; end
    end

    has_modrm = 1'b0;
    imm       = 0;
    unique case (map)
      2'd0: begin
        bad       = bad | op1_invalid(op);
        has_modrm = op1_modrm(op);
        imm       = op1_imm(op, osz, rexw, asz);
      end
      2'd1: begin
        bad       = bad | op2_invalid(win[opc_at % WIN]);
        has_modrm = op2_modrm(win[opc_at % WIN]);
        imm       = op2_imm(win[opc_at % WIN]);
      end
      2'd2: begin has_modrm = 1'b1; imm = 0; end
      2'd3: begin has_modrm = 1'b1; imm = 1; end
    endcase

    total = opc_at + 1;
    modrm = win[total % WIN];
    sib   = win[(total + 1) % WIN];
    if (has_modrm) begin
      total = total + 1;
      if (modrm[7:6] != 2'b11 && modrm[2:0] == 3'b100) total = total + 1;   // SIB
      if (modrm[7:6] == 2'b01) total = total + 1;                           // disp8
      else if (modrm[7:6] == 2'b10) total = total + 4;                      // disp32
      else if (modrm[7:6] == 2'b00) begin
        if (modrm[2:0] == 3'b101) total = total + 4;                        // RIP+disp32
        else if (modrm[2:0] == 3'b100 && sib[2:0] == 3'b101) total = total + 4;
      end
      // Group 3 TEST has an immediate, the other members do not.
      if (map == 2'd0 && op == 8'hF6 && modrm[5:4] == 2'b00) imm = 1;
      if (map == 2'd0 && op == 8'hF7 && modrm[5:4] == 2'b00) imm = osz ? 2 : 4;
    end
    total = total + imm;

    if (total > int'(MAX_INSN)) bad = 1'b1;
    if (!bad && !avail[(total - 1) % WIN]) bad = 1'b1;   // runs past the line

    len = bad ? '0 : len_t'(total);

    // ---- branch classification ----
    kind    = INSN_OTHER;
    disp    = '0;
    ret_imm = 1'b0;
    if (!bad) begin
      if (map == 2'd0) begin
        case (op)
          8'hE9: begin kind = INSN_JMP_REL;
                       disp = {win[(p+4)%WIN], win[(p+3)%WIN], win[(p+2)%WIN], win[(p+1)%WIN]}; end
          8'hEB: begin kind = INSN_JMP_REL;  disp = {{24{win[(p+1)%WIN][7]}}, win[(p+1)%WIN]}; end
          8'hE8: begin kind = INSN_CALL_REL;
                       disp = {win[(p+4)%WIN], win[(p+3)%WIN], win[(p+2)%WIN], win[(p+1)%WIN]}; end
          8'hC3: kind = INSN_RET;
          8'hC2: begin kind = INSN_RET; ret_imm = 1'b1; end
          8'hFF: if (modrm[5:3] >= 3'd2 && modrm[5:3] <= 3'd5) kind = INSN_INDIRECT;
          default: if ((op >= 8'h70 && op <= 8'h7F) || (op >= 8'hE0 && op <= 8'hE3))
                     kind = INSN_COND;
        endcase
      end else if (map == 2'd1 && win[opc_at % WIN] >= 8'h80 && win[opc_at % WIN] <= 8'h8F) begin
        kind = INSN_COND;
      end
    end
  end

endmodule

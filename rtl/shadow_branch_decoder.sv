// shadow_branch_decoder: finds branches in the unused bytes of a fetched line.
//
// When the fetch engine reads a line for a Fetch Target Queue entry, only the
// bytes from the entry point (target of the previous taken branch) up to the
// exit point (the taken branch that leaves the line) are decoded by the core.
// The bytes before the entry point (head shadow) and after the exit branch
// (tail shadow) may hold branches that will be needed later. This block
// decodes them and emits every direct unconditional jump, direct call and
// return it finds, with its address and (for jumps and calls) its target, as
// fills for the Shadow Branch Buffers. Conditional and indirect branches are
// not emitted: their direction or target is not known from the bytes alone.
//
// Head shadow (bytes 0 .. entry-1). x86 instructions have variable length, so
// it is not known where the first instruction of the line begins. Following
// the paper, two phases:
//   Index Computation: Length[i] = length of the instruction that would start
//     at byte i, for every i below the entry offset (0 = none decodes).
//   Path Validation: a path starts at byte s and steps by Length; it is valid
//     if it lands exactly on the entry offset. If MAX_VALID_PATHS (6) or more
//     valid paths exist the line is discarded. Otherwise the path from the
//     lowest valid start (the paper's "First Index") is decoded and its
//     jumps, calls and returns are emitted.
// Tail shadow (bytes after the exit branch): decoding starts at the exit
// branch, whose start is known, steps over it and continues to the end of the
// line; there is only one possible decoding.
//
// Implementation choices of this design (the paper gives the algorithm, not
// the hardware): one shared length decoder, one byte position per cycle;
// Path Validation is done as one backward sweep that marks, for every byte,
// whether a path from it reaches the entry offset (equivalent to walking each
// path forward, and bounded to `entry` cycles); candidate start bytes are
// 0 .. START_WINDOW-1 (15, the longest x86 instruction, since the first
// complete instruction of the line must begin within it).
//
// Timing, for a line with entry offset E, H instructions on the chosen head
// path and T instructions after the exit branch: E cycles of Index
// Computation, E cycles of Path Validation, 1 cycle to pick the path, H
// cycles of head decode, then 1 + T cycles of tail decode (at most one fill
// per cycle), then `done` for one cycle. `ready` is high only in IDLE; a
// request while busy is ignored (the caller drops it: shadow decoding is
// opportunistic and off the critical path).
//
// Interface: req_valid with req_line/req_base (line address), req_head_en +
// req_entry (entry offset, head decoding only if it is nonzero), req_tail_en
// + req_exit (offset of the first byte of the taken exit branch).
// fill_valid/fill: one branch for the SBB; head_paths: valid path count of
// the last head decode; head_discard: pulse when a line had too many paths.
module shadow_branch_decoder
  import skia_pkg::*;
#(
  parameter int unsigned MAX_VALID_PATHS = 6,
  parameter int unsigned START_WINDOW    = 15
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      ready,
  input  line_t     req_line,
  input  addr_t     req_base,
  input  logic      req_head_en,
  input  off_t      req_entry,
  input  logic      req_tail_en,
  input  off_t      req_exit,
  output logic      fill_valid,
  output sbb_fill_t fill,
  output logic [6:0] head_paths,
  output logic      head_discard,
  output logic      done
);

  typedef enum logic [2:0] {
    S_IDLE, S_INDEX, S_VALIDATE, S_PICK, S_HEAD, S_TAIL_SKIP, S_TAIL
  } state_e;

  state_e          state_q;
  line_t           line_q;
  addr_t           base_q;
  logic [6:0]      entry_q;       // 1..63 when head decoding
  logic            tail_en_q;
  off_t            exit_q;
  logic [6:0]      pos_q;         // current byte position (0..64)
  len_t            len_vec_q [LINE_BYTES];
  logic [LINE_BYTES:0] reach_q;   // reach_q[i]: a path from byte i lands on entry

  // ---- the one length decoder ------------------------------------------------
  len_t        ld_len;
  insn_kind_e  ld_kind;
  logic [31:0] ld_disp;
  logic        ld_ret_imm;

  x86_length_decoder u_ld (
    .line(line_q), .pos(pos_q[OFF_W-1:0]),
    .len(ld_len), .kind(ld_kind), .disp(ld_disp), .ret_imm(ld_ret_imm)
  );

  // ---- path selection (combinational, used in S_PICK) --------------------------
  logic [6:0] n_valid;
  logic [6:0] first_idx;
  logic       any_valid;
  always_comb begin
    n_valid = '0; first_idx = '0; any_valid = 1'b0;
    for (int s = 0; s < START_WINDOW && s < LINE_BYTES; s++) begin
      if (7'(s) < entry_q && reach_q[s]) begin
        n_valid = n_valid + 1'b1;
        if (!any_valid) begin any_valid = 1'b1; first_idx = 7'(s); end
      end
    end
  end

  // ---- reach of the next step in the backward sweep ----------------------------
  logic [7:0] step_end;   // pos + Length[pos]
  logic       step_reach;
  always_comb begin
    step_end   = {1'b0, pos_q} + 8'(len_vec_q[pos_q[OFF_W-1:0]]);
    step_reach = (len_vec_q[pos_q[OFF_W-1:0]] != '0) && (step_end <= {1'b0, entry_q})
                 && reach_q[step_end[6:0]];
  end

  // ---- a decoded branch, as an SBB fill ------------------------------------------
  addr_t insn_pc;
  logic  emit;
  assign insn_pc = base_q + addr_t'(pos_q);
  assign emit    = (ld_len != '0) &&
                   (ld_kind inside {INSN_JMP_REL, INSN_CALL_REL, INSN_RET});

  sbb_fill_t fill_d;
  always_comb begin
    fill_d.is_ret  = (ld_kind == INSN_RET);
    fill_d.is_call = (ld_kind == INSN_CALL_REL);
    fill_d.ret_imm = ld_ret_imm;
    fill_d.head    = (state_q == S_HEAD);
    fill_d.pc      = insn_pc;
    fill_d.target  = (ld_kind == INSN_RET) ? '0
                   : insn_pc + addr_t'(ld_len) + {{(ADDR_W-32){ld_disp[31]}}, ld_disp};
  end

  assign ready = (state_q == S_IDLE);

  always_ff @(posedge clk) begin
    if (state_q == S_IDLE && req_valid) begin
      line_q <= req_line;
      base_q <= line_base(req_base);
    end
    if (state_q == S_INDEX) len_vec_q[pos_q[OFF_W-1:0]] <= ld_len;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= S_IDLE;
      entry_q      <= '0;
      tail_en_q    <= 1'b0;
      exit_q       <= '0;
      pos_q        <= '0;
      reach_q      <= '0;
      fill_valid   <= 1'b0;
      fill         <= '0;
      head_paths   <= '0;
      head_discard <= 1'b0;
      done         <= 1'b0;
    end else begin
      fill_valid   <= 1'b0;
      head_discard <= 1'b0;
      done         <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          entry_q   <= {1'b0, req_entry};
          tail_en_q <= req_tail_en;
          exit_q    <= req_exit;
          if (req_head_en && req_entry != '0) begin
            state_q <= S_INDEX;
            pos_q   <= '0;
          end else if (req_tail_en) begin
            state_q <= S_TAIL_SKIP;
            pos_q   <= {1'b0, req_exit};
          end else begin
            done <= 1'b1;
          end
        end

        // Length[pos] for pos = 0 .. entry-1.
        S_INDEX: begin
          if (pos_q + 1'b1 == entry_q) begin
            state_q <= S_VALIDATE;
            reach_q <= '0;
            reach_q[entry_q] <= 1'b1;
          end else begin
            pos_q <= pos_q + 1'b1;
          end
        end

        // Backward sweep pos = entry-1 .. 0.
        S_VALIDATE: begin
          reach_q[pos_q] <= step_reach;
          if (pos_q == '0) state_q <= S_PICK;
          else             pos_q   <= pos_q - 1'b1;
        end

        S_PICK: begin
          head_paths <= n_valid;
          if (n_valid >= 7'(MAX_VALID_PATHS)) begin
            head_discard <= 1'b1;
            state_q      <= tail_en_q ? S_TAIL_SKIP : S_IDLE;
            pos_q        <= {1'b0, exit_q};
            done         <= !tail_en_q;
          end else if (any_valid) begin
            state_q <= S_HEAD;
            pos_q   <= first_idx;
          end else begin
            state_q <= tail_en_q ? S_TAIL_SKIP : S_IDLE;
            pos_q   <= {1'b0, exit_q};
            done    <= !tail_en_q;
          end
        end

        // Walk the chosen path to the entry offset, emitting branches.
        S_HEAD: begin
          if (emit) begin
            fill_valid <= 1'b1;
            fill       <= fill_d;
          end
          if (pos_q + 7'(ld_len) >= entry_q || ld_len == '0) begin
            state_q <= tail_en_q ? S_TAIL_SKIP : S_IDLE;
            pos_q   <= {1'b0, exit_q};
            done    <= !tail_en_q;
          end else begin
            pos_q <= pos_q + 7'(ld_len);
          end
        end

        // Step over the exit branch itself.
        S_TAIL_SKIP: begin
          if (ld_len == '0 || pos_q + 7'(ld_len) >= 7'(LINE_BYTES)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            state_q <= S_TAIL;
            pos_q   <= pos_q + 7'(ld_len);
          end
        end

        // Decode to the end of the line.
        S_TAIL: begin
          if (emit) begin
            fill_valid <= 1'b1;
            fill       <= fill_d;
          end
          if (ld_len == '0 || pos_q + 7'(ld_len) >= 7'(LINE_BYTES)) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end else begin
            pos_q <= pos_q + 7'(ld_len);
          end
        end

        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A chosen head path never runs past the entry offset.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state_q == S_HEAD) |-> (pos_q < entry_q));

endmodule

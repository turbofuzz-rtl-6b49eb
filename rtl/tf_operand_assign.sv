// tf_operand_assign: operand assignment, the second pass over an iteration.
//
// Once the mutation engine or the direct-mode generator has filled the global
// context, this unit walks the iteration from the first entry to the last and
// turns every entry into a finished RV64 instruction on the stimulus stream.
// Each entry passes three pipelined steps, one cycle each after the buffer
// read:
//   context analyzer   resolves the target. A control-flow entry copied from
//                      a seed (`tgt_seed`) looks its seed block up in the
//                      remap table; if that block was deleted, a random block
//                      of the iteration is taken instead. A block index past
//                      the last block means "end of code". The block index is
//                      turned into an address with the block base table. A
//                      store/AMO address outside the data region is folded
//                      into it. V = target - (base address of this block).
//   bitfield placement places registers, immediates and the PC-relative
//                      offset V in the RISC-V fields of the instruction's
//                      class: AUIPC gets %hi(V), ADDI/loads/stores/JALR get
//                      %lo(V), branches and JAL get V. Fresh entries take
//                      random registers from the fuzzing context; retained
//                      entries keep their registers, and a retained entry of
//                      a class without an address keeps every bit. The
//                      third source of a fused multiply-add takes the low
//                      bits of the random shift amount, 32-bit shifts get a
//                      5-bit amount and LR gets rs2 = x0.
//   constraint         checks the result: a branch or JAL whose offset does
//   validation         not fit is redirected to the next instruction, and an
//                      unknown major opcode becomes a NOP. Each repair, and
//                      each folded store/AMO block (once, at its prime),
//                      counts in `n_fix`.
// The output entry carries the final instruction, its block, its class and
// the resolved target (block index or address), which is the format stored
// in the corpus.
//
// Timing: read, analyze, place and validate form a four-stage pipeline with
// one valid bit per stage. When `out_ready` is low the whole pipeline holds
// (the buffer's read register keeps its word because no read is issued). The
// first entry appears on `out_valid` four cycles after `start`, then one entry
// per cycle while `out_ready` is high; `done` pulses once the pipeline has
// drained after the last entry. The only state passed from one entry to the
// next is the base register of the current block, which travels down the
// pipeline with each entry.
//
// The three steps and their order follow the paper's figure of the fuzzer,
// as does replacing a deleted target by a randomly chosen block start, and
// the paper asks for pipelined processing inside the units; the repair rules
// and the pipeline's stage split are this design's choices.
module tf_operand_assign
  import tf_pkg::*;
#(
  parameter logic [31:0] DATA_BASE      = 32'h8010_0000,
  parameter int unsigned DATA_SIZE_LOG2 = 16,
  parameter logic [31:0] SEED           = 32'h0BE7_A5E5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BLK_W:0]   n_entries,
  input  logic [BLK_W:0]   n_blk,
  input  logic [31:0]      code_end,
  output logic             gc_rd_en,
  output logic [BLK_W-1:0] gc_rd_addr,
  input  entry_t           gc_rd_entry,
  output logic [BLK_W-1:0] base_idx0,
  input  logic [31:0]      base_addr0,
  output logic [BLK_W-1:0] base_idx1,
  input  logic [31:0]      base_addr1,
  output logic [BLK_W-1:0] remap_idx,
  input  logic             remap_hit,
  input  logic [BLK_W-1:0] remap_blk,
  output logic             out_valid,
  output entry_t           out_entry,
  input  logic             out_ready,
  output logic             busy,
  output logic             done,
  output logic [31:0]      n_fix
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e st;

  logic [BLK_W:0] ptr;
  logic           v_an, v_pl, v_va;   // stage valid bits: analyze, place, validate
  logic           adv, issue;

  assign adv   = !v_va || out_ready;
  assign issue = (st == S_RUN) && (ptr < n_entries) && adv;

  // Fuzzing context for register and immediate values.
  logic [4:0]  c_rd, c_rs1, c_rs2, c_rb;
  logic [11:0] c_imm12;
  logic [19:0] c_imm20;
  logic [5:0]  c_shamt;
  logic [63:0] c_rnd;

  tf_fuzz_context #(.SEED0(SEED), .SEED1(SEED ^ 32'h3C3C_C3C3)) u_ctx (
    .clk, .rst_n, .next(v_an && adv), .mem_data_prob(5'd16), .is_store(1'b1),
    .rd(c_rd), .rs1(c_rs1), .rs2(c_rs2), .rb(c_rb), .imm12(c_imm12), .imm20(c_imm20),
    .shamt(c_shamt), .mem_addr(), .mem_is_data(), .jump_delta(), .rnd(c_rnd));

  // ---------------- context analyzer ----------------
  entry_t           e;
  logic [BLK_W-1:0] an_tgt;
  logic [31:0]      an_addr, an_target;
  logic             an_fold;
  logic [4:0]       an_rb, blk_rb;   // base register: this entry's, last entry's

  assign e          = gc_rd_entry;
  assign remap_idx  = e.aux[BLK_W-1:0];
  assign base_idx1  = e.blk;
  assign base_idx0  = an_tgt;

  function automatic logic in_data(input logic [31:0] a);
    return (a >= DATA_BASE) && ((a - DATA_BASE) < (32'd1 << DATA_SIZE_LOG2));
  endfunction

  always_comb begin
    if (e.tgt_seed)
      an_tgt = remap_hit ? remap_blk
                         : BLK_W'(32'(c_rnd[47:32]) % 32'(n_blk == '0 ? (BLK_W+1)'(1) : n_blk));
    else
      an_tgt = e.aux[BLK_W-1:0];
    an_addr = e.aux;
    an_fold = 1'b0;
    if ((e.cls == CL_STORE || e.cls == CL_AMO) && !in_data(e.aux)) begin
      an_fold = 1'b1;
      an_addr = DATA_BASE + (e.aux & ((32'd1 << DATA_SIZE_LOG2) - 32'd8));
    end
    if (e.is_cf) an_target = ((BLK_W+1)'(an_tgt) >= n_blk) ? code_end : base_addr0;
    else         an_target = an_addr;
    if (!e.first)               an_rb = blk_rb;
    else if (!e.retained)       an_rb = c_rb;
    else if (e.role == R_AUIPC) an_rb = e.instr[11:7];
    else                        an_rb = e.instr[19:15];
  end

  // Analyzer outputs, registered.
  entry_t      a_e;
  logic [31:0] a_v, a_res;
  logic        a_fold;
  logic [4:0]  a_rd, a_rs1, a_rs2;
  logic [11:0] a_imm12;
  logic [19:0] a_imm20;
  logic [5:0]  a_shamt;

  // ---------------- bitfield placement ----------------
  function automatic logic [31:0] keep_mask(input iclass_e c, input role_e r);
    if (r == R_AUIPC) return 32'h0000_007F;
    if (r == R_ADDI)  return 32'h0000_707F;
    case (c)
      CL_R, CL_AMO: return 32'hFE00_707F;
      CL_SHIFT:     return 32'hFC00_707F;
      CL_U, CL_JAL: return 32'h0000_007F;
      CL_CSR, CL_R1: return 32'hFFF0_707F;
      CL_R4:        return 32'h0600_707F;
      CL_RAW:       return 32'hFFFF_FFFF;
      default:      return 32'h0000_707F;
    endcase
  endfunction

  logic [31:0] pl_instr;
  logic        pl_range_bad;

  always_comb begin
    logic [31:0] v, hi;
    logic [4:0]  rd, rs1, rs2;
    logic        keep_all;
    v   = a_v;
    hi  = (v + 32'h800) >> 12;
    rd  = a_e.retained ? a_e.instr[11:7]  : a_rd;
    rs1 = a_e.retained ? a_e.instr[19:15] : a_rs1;
    rs2 = a_e.retained ? a_e.instr[24:20] : a_rs2;
    keep_all = (a_e.cls == CL_RAW) ||
               (a_e.retained && a_e.role == R_PRIME &&
                !(a_e.cls inside {CL_LOAD, CL_STORE, CL_BRANCH, CL_JAL, CL_JALR}));
    pl_instr     = a_e.instr & keep_mask(a_e.cls, a_e.role);
    pl_range_bad = 1'b0;
    if (keep_all) pl_instr = a_e.instr;
    else if (a_e.role == R_AUIPC) pl_instr |= {hi[19:0], blk_rb, 7'd0};
    else if (a_e.role == R_ADDI)  pl_instr |= {v[11:0], blk_rb, 3'd0, blk_rb, 7'd0};
    else begin
      case (a_e.cls)
        CL_R:      pl_instr |= {7'd0, rs2, rs1, 3'd0, rd, 7'd0};
        CL_I:      pl_instr |= {a_imm12, rs1, 3'd0, rd, 7'd0};
        CL_SHIFT:  pl_instr |= {6'd0, a_shamt[5] & (a_e.instr[6:0] != 7'h1B), a_shamt[4:0], rs1,
                                3'd0, rd, 7'd0};
        CL_U:      pl_instr |= {a_imm20, rd, 7'd0};
        CL_LOAD,
        CL_JALR:   pl_instr |= {v[11:0], blk_rb, 3'd0, rd, 7'd0};
        CL_STORE:  pl_instr |= {v[11:5], rs2, blk_rb, 3'd0, v[4:0], 7'd0};
        CL_AMO:    pl_instr |= {7'd0, (a_e.instr[31:27] == 5'b00010) ? 5'd0 : rs2, blk_rb, 3'd0, rd,
                                7'd0};
        CL_CSR,
        CL_R1:     pl_instr |= {12'd0, rs1, 3'd0, rd, 7'd0};
        CL_R4:     pl_instr |= {a_shamt[4:0], 2'd0, rs2, rs1, 3'd0, rd, 7'd0};
        CL_BRANCH: begin
          pl_instr |= {v[12], v[10:5], rs2, rs1, 3'd0, v[4:1], v[11], 7'd0};
          pl_range_bad = ($signed(v) > 32'sd4094) || ($signed(v) < -32'sd4096);
        end
        CL_JAL: begin
          pl_instr |= {v[20], v[10:1], v[11], v[19:12], rd, 7'd0};
          pl_range_bad = ($signed(v) > 32'sd1048574) || ($signed(v) < -32'sd1048576);
        end
        default: ;
      endcase
    end
  end

  // Placement outputs and the entry they belong to, registered.
  entry_t      p_e;
  logic [31:0] p_instr, p_res;
  logic        p_bad, p_fold;

  // ---------------- constraint validation ----------------
  function automatic logic legal_opcode(input logic [6:0] opc);
    case (opc)
      7'h03, 7'h07, 7'h0F, 7'h13, 7'h17, 7'h1B, 7'h23, 7'h27, 7'h2F, 7'h33,
      7'h37, 7'h3B, 7'h43, 7'h47, 7'h4B, 7'h4F, 7'h53, 7'h63, 7'h67, 7'h6F,
      7'h73: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  logic [31:0] va_instr;
  logic [31:0] va_aux;
  logic        va_fix;

  always_comb begin
    va_instr = p_instr;
    va_aux   = p_res;
    va_fix   = 1'b0;
    if (p_bad) begin
      va_fix = 1'b1;
      va_aux = 32'(p_e.blk) + 32'd1;
      if (p_e.cls == CL_BRANCH) va_instr = (p_instr & 32'h01FF_F07F) | 32'h0000_0200; // +4
      else                      va_instr = (p_instr & 32'h0000_0FFF) | 32'h0040_0000; // +4
    end else if (p_e.cls != CL_RAW && !legal_opcode(p_instr[6:0])) begin
      va_fix   = 1'b1;
      va_instr = INSN_NOP;
    end
  end

  always_comb begin
    out_entry          = p_e;
    out_entry.instr    = va_instr;
    out_entry.aux      = va_aux;
    out_entry.retained = 1'b0;
    out_entry.tgt_seed = 1'b0;
  end
  assign out_valid = v_va;

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ptr <= '0; n_fix <= '0;
      v_an <= 1'b0; v_pl <= 1'b0; v_va <= 1'b0;
      a_e <= '0; a_v <= '0; a_res <= '0; a_fold <= 1'b0;
      a_rd <= '0; a_rs1 <= '0; a_rs2 <= '0; blk_rb <= 5'd5;
      a_imm12 <= '0; a_imm20 <= '0; a_shamt <= '0;
      p_instr <= '0; p_bad <= 1'b0; p_e <= '0; p_res <= '0; p_fold <= 1'b0;
    end else begin
      case (st)
        S_IDLE: if (start) begin ptr <= '0; st <= S_RUN; end
        S_RUN:  if (ptr >= n_entries && !v_an && !v_pl && !v_va) st <= S_DONE;
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      if (issue) ptr <= ptr + 1'b1;
      if (adv) begin
        v_an <= issue;
        v_pl <= v_an;
        v_va <= v_pl;
        if (v_an) begin
          a_e    <= e;
          a_v    <= an_target - base_addr1;
          a_res  <= e.is_cf ? 32'(an_tgt) : an_addr;
          a_fold <= an_fold;
          a_rd <= c_rd; a_rs1 <= c_rs1; a_rs2 <= c_rs2;
          a_imm12 <= c_imm12; a_imm20 <= c_imm20; a_shamt <= c_shamt;
          blk_rb <= an_rb;
        end
        if (v_pl) begin
          p_instr <= pl_instr;
          p_bad   <= pl_range_bad;
          p_e     <= a_e;
          p_res   <= a_res;
          p_fold  <= a_fold;
        end
      end
      if (v_va && out_ready && (va_fix || (p_fold && p_e.role == R_PRIME))) n_fix <= n_fix + 1'b1;
    end
  end

  assign gc_rd_en   = issue;
  assign gc_rd_addr = ptr[BLK_W-1:0];
  assign busy       = (st != S_IDLE);
  assign done       = (st == S_DONE);
endmodule

// tf_block_gen: direct-mode random generation of one instruction block.
//
// On `start` (accepted when not busy) the generator draws a random library
// index (16 LFSR bits scaled onto the library size), takes the enabled prime
// instruction the library returns and emits
// the block one entry per cycle on the following cycles: the affiliated
// instructions first (AUIPC, then ADDI for AMOs) and the prime last. `out_last`
// marks the prime. A block therefore takes 1 to 3 cycles after `start`.
//
// Every entry of the block carries the block's target in `aux`: for memory
// instructions the address chosen by the fuzzing context (data region for
// stores, 3/4 data region for loads), for control flow the index of a block
// 1..JUMP_RANGE blocks ahead of `cur_blk`, the index this block will receive.
// Register and immediate fields are left zero here; operand assignment fills
// them once the whole iteration, and so every block address, is known.
//
// The split of prime and affiliated instructions and the context recorded per
// block follow the paper; which primes get which affiliated instructions is
// this design's choice.
module tf_block_gen
  import tf_pkg::*;
#(
  parameter int unsigned JUMP_RANGE = 4,
  parameter logic [31:0] SEED       = 32'h5EED_0001
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [NUM_CAT-1:0] cat_en,
  input  logic [4:0]         mem_data_prob,
  input  logic [BLK_W-1:0]   cur_blk,
  output logic               busy,
  output logic               out_valid,
  output entry_t             out_entry,
  output logic               out_last
);
  logic [31:0] q;
  logic [31:0] lib_tmpl;
  iclass_e     lib_cls;
  logic [2:0]  lib_cat;
  logic [1:0]  lib_naff;
  logic [LIB_IW-1:0] lib_sel;
  logic [LIB_IW-1:0] lib_idx;
  logic        take;

  logic [31:0] ctx_addr;
  logic        ctx_is_data;
  logic [BLK_W-1:0] ctx_delta;

  assign take = start && !busy;

  tf_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en(take), .reseed(1'b0), .seed_val('0), .q(q));

  // Scale 16 random bits onto the library size.
  assign lib_idx = LIB_IW'((q[15:0] * 32'(LIB_N)) >> 16);

  tf_instr_library u_lib (.idx(lib_idx), .cat_en, .tmpl(lib_tmpl), .cls(lib_cls), .cat(lib_cat),
                          .n_aff(lib_naff), .sel_idx(lib_sel));

  tf_fuzz_context #(.JUMP_RANGE(JUMP_RANGE), .SEED0(SEED ^ 32'h0F0F_1111),
                    .SEED1(SEED ^ 32'h7777_0000)) u_ctx (
    .clk, .rst_n, .next(take), .mem_data_prob,
    .is_store(lib_cls == CL_STORE || lib_cls == CL_AMO),
    .rd(), .rs1(), .rs2(), .rb(), .imm12(), .imm20(), .shamt(),
    .mem_addr(ctx_addr), .mem_is_data(ctx_is_data), .jump_delta(ctx_delta), .rnd());

  // Captured block description.
  logic [31:0] b_tmpl, b_aux;
  iclass_e     b_cls;
  logic [1:0]  b_naff, step;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      b_tmpl <= '0;
      b_aux  <= '0;
      b_cls  <= CL_I;
      b_naff <= '0;
      step   <= '0;
    end else if (take) begin
      busy   <= 1'b1;
      b_tmpl <= lib_tmpl;
      b_cls  <= lib_cls;
      b_naff <= lib_naff;
      step   <= '0;
      case (lib_cls)
        CL_LOAD, CL_STORE, CL_AMO:   b_aux <= ctx_addr;
        CL_BRANCH, CL_JAL, CL_JALR:  b_aux <= 32'(cur_blk) + 32'(ctx_delta);
        default:                     b_aux <= '0;
      endcase
    end else if (busy) begin
      step <= step + 2'd1;
      if (out_last) busy <= 1'b0;
    end
  end

  always_comb begin
    out_valid = busy;
    out_last  = busy && (step == b_naff);
    out_entry = '0;
    out_entry.cls   = b_cls;
    out_entry.aux   = b_aux;
    out_entry.first = (step == 2'd0);
    out_entry.is_cf = (b_cls == CL_BRANCH || b_cls == CL_JAL || b_cls == CL_JALR);
    if (step == b_naff) begin
      out_entry.role  = R_PRIME;
      out_entry.instr = b_tmpl;
    end else if (step == 2'd0) begin
      out_entry.role  = R_AUIPC;
      out_entry.instr = OPC_AUIPC;
    end else begin
      out_entry.role  = R_ADDI;
      out_entry.instr = OPC_ADDI;
    end
  end
endmodule

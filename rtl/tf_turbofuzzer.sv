// tf_turbofuzzer: the hardware fuzzer IP.
//
// One `start` builds one iteration (up to cfg.iter_len instructions, 4000 by
// default) and streams it out as finished instructions. Work is done in two
// passes over the global context:
//   1. Build. Mode selection draws a random number: with probability
//      cfg.mut_prob/16 (7/16 by default) and a non-empty corpus the iteration
//      is made in mutation mode, otherwise in direct mode.
//      Direct mode: the block generator adds random blocks until another
//      block of up to three instructions would exceed the target length.
//      Mutation mode: the fuzzer asks the corpus manager for a seed
//      (`seed_req`/`seed_ack`, giving its length) and the mutation engine
//      rewrites it block by block, using the same block generator for
//      inserted blocks, and fills the remainder with generated blocks.
//   2. Operand assignment walks the finished iteration and emits each
//      instruction on `out_*`, now that every block address is known.
// `done` pulses when the last instruction has been accepted. `mode` holds the
// mode of the current iteration; `op_valid`/`op` report each block-level
// mutation decision, `n_fix` counts repairs made by constraint validation.
//
// The modes, their default probabilities and the structure (random generation
// and mutation engine feeding instruction blocks and global contexts, then
// operand assignment) follow the paper. Choosing the mode once per iteration
// and building the whole iteration before operand assignment are this
// design's choices.
module tf_turbofuzzer
  import tf_pkg::*;
#(
  parameter int unsigned ITER_DEPTH     = 4096,
  parameter int unsigned JUMP_RANGE     = 4,
  parameter logic [31:0] CODE_BASE      = 32'h8000_0000,
  parameter logic [31:0] DATA_BASE      = 32'h8010_0000,
  parameter int unsigned DATA_SIZE_LOG2 = 16,
  parameter logic [31:0] SEED           = 32'h7F0F_2025
) (
  input  logic             clk,
  input  logic             rst_n,
  input  tf_cfg_t          cfg,
  input  logic             start,
  input  logic             corpus_nonempty,
  output logic             seed_req,
  input  logic             seed_ack,
  input  logic [BLK_W:0]   seed_len,
  output logic             sd_rd_en,
  output logic [BLK_W-1:0] sd_rd_addr,
  input  entry_t           sd_rd_data,
  output logic             out_valid,
  output entry_t           out_entry,
  input  logic             out_ready,
  output logic             busy,
  output logic             done,
  output mode_e            mode,
  output logic             op_valid,
  output mutop_e           op,
  output logic [31:0]      n_fix,
  output logic [BLK_W:0]   iter_instrs,
  output logic             overflow
);
  typedef enum logic [3:0] {S_IDLE, S_DECIDE, S_SEEDREQ, S_SEEDWAIT, S_MUT, S_DSTART, S_DWAIT,
                            S_ASSIGN, S_AWAIT, S_DONE} state_e;
  state_e st;

  logic [31:0] q;
  tf_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en(st == S_DECIDE), .reseed(1'b0), .seed_val('0), .q(q));

  // Global context wiring.
  logic             gc_clear, app_valid, remap_we, gc_rd_en, remap_hit;
  entry_t           app_entry, gc_rd_entry;
  logic [BLK_W-1:0] remap_old, remap_new, gc_rd_addr, base_idx0, base_idx1, remap_idx, remap_blk;
  logic [31:0]      base_addr0, base_addr1, code_end;
  logic [BLK_W:0]   instr_cnt, blk_cnt;

  // Block generator wiring.
  logic   bg_start, bg_busy, bg_valid, bg_last, bg_start_direct, me_bg_start;
  entry_t bg_entry;

  // Mutation engine wiring.
  logic   me_start, me_valid, me_busy, me_done;
  entry_t me_entry;

  // Operand assignment wiring.
  logic oa_start, oa_busy, oa_done;

  logic dir_fits;
  assign dir_fits = (instr_cnt + (BLK_W+1)'(3)) <= cfg.iter_len;

  assign bg_start_direct = (st == S_DSTART) && dir_fits;
  assign bg_start        = bg_start_direct || me_bg_start;

  tf_block_gen #(.JUMP_RANGE(JUMP_RANGE), .SEED(SEED ^ 32'h1357_9BDF)) u_bg (
    .clk, .rst_n, .start(bg_start), .cat_en(cfg.cat_en), .mem_data_prob(cfg.mem_data_prob),
    .cur_blk(blk_cnt[BLK_W-1:0]), .busy(bg_busy), .out_valid(bg_valid), .out_entry(bg_entry),
    .out_last(bg_last));

  tf_mutation_engine #(.SEED(SEED ^ 32'h2468_ACE0)) u_me (
    .clk, .rst_n, .start(me_start), .seed_len, .p_gen(cfg.p_gen), .p_del(cfg.p_del),
    .iter_len(cfg.iter_len), .gc_instr_cnt(instr_cnt), .gc_blk_cnt(blk_cnt),
    .sd_rd_en, .sd_rd_addr, .sd_rd_data, .bg_start(me_bg_start), .bg_last(bg_valid && bg_last),
    .out_valid(me_valid), .out_entry(me_entry), .remap_we, .remap_old, .remap_new,
    .busy(me_busy), .done(me_done), .op_valid, .op);

  assign app_valid = bg_valid || me_valid;
  assign app_entry = bg_valid ? bg_entry : me_entry;

  tf_global_context #(.DEPTH(ITER_DEPTH), .CODE_BASE(CODE_BASE)) u_gc (
    .clk, .rst_n, .clear(gc_clear), .app_valid, .app_entry, .remap_we, .remap_old, .remap_new,
    .rd_en(gc_rd_en), .rd_addr(gc_rd_addr), .rd_entry(gc_rd_entry),
    .base_idx0, .base_addr0, .base_idx1, .base_addr1, .remap_idx, .remap_hit, .remap_blk,
    .instr_cnt, .blk_cnt, .code_end, .overflow);

  tf_operand_assign #(.DATA_BASE(DATA_BASE), .DATA_SIZE_LOG2(DATA_SIZE_LOG2),
                      .SEED(SEED ^ 32'h5A5A_0F0F)) u_oa (
    .clk, .rst_n, .start(oa_start), .n_entries(instr_cnt), .n_blk(blk_cnt), .code_end,
    .gc_rd_en, .gc_rd_addr, .gc_rd_entry, .base_idx0, .base_addr0, .base_idx1, .base_addr1,
    .remap_idx, .remap_hit, .remap_blk, .out_valid, .out_entry, .out_ready,
    .busy(oa_busy), .done(oa_done), .n_fix);

  assign gc_clear = (st == S_DECIDE);
  assign seed_req = (st == S_SEEDREQ);
  assign me_start = (st == S_SEEDWAIT) && seed_ack;
  assign oa_start = (st == S_ASSIGN);
  assign busy     = (st != S_IDLE);
  assign done     = (st == S_DONE);
  assign iter_instrs = instr_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= S_IDLE;
      mode <= M_DIRECT;
    end else begin
      case (st)
        S_IDLE:   if (start) st <= S_DECIDE;
        S_DECIDE: begin
          if (corpus_nonempty && ({1'b0, q[3:0]} < cfg.mut_prob)) begin
            mode <= M_MUTATE;
            st   <= S_SEEDREQ;
          end else begin
            mode <= M_DIRECT;
            st   <= S_DSTART;
          end
        end
        S_SEEDREQ:  st <= S_SEEDWAIT;
        S_SEEDWAIT: if (seed_ack) st <= S_MUT;
        S_MUT:      if (me_done) st <= S_ASSIGN;
        S_DSTART:   st <= dir_fits ? S_DWAIT : S_ASSIGN;
        S_DWAIT:    if (bg_valid && bg_last) st <= S_DSTART;
        S_ASSIGN:   st <= S_AWAIT;
        S_AWAIT:    if (oa_done) st <= S_DONE;
        S_DONE:     st <= S_IDLE;
        default:    st <= S_IDLE;
      endcase
    end
  end

  // The block generator and the mutation engine never append together.
  a_single_writer: assert property (@(posedge clk) disable iff (!rst_n) !(bg_valid && me_valid));
endmodule

// tf_mutation_engine: block-level mutation of a seed.
//
// Reads the selected seed from the corpus one entry at a time (synchronous
// read, two cycles per entry) and decides, at every block start, between
//   generation  (p_gen/16, 3/16 by default): a new random block is inserted at
//               this point by the shared block generator; the seed block
//               that follows it is then kept,
//   deletion    (p_del/16, 11/16 by default): the block is not copied, so the
//               instructions after it move up; no remap entry is written,
//   retention   (the rest, 2/16 by default): the block is copied with
//               `retained` set, and the remap table learns that the seed's
//               block `blk` is now block `gc_blk_cnt` of this iteration.
//               Control-flow entries get `tgt_seed` set: their `aux` still
//               names a seed block, which operand assignment resolves through
//               the remap table (context regeneration).
// When the seed is used up and the iteration is still shorter than
// `iter_len`, generated blocks fill it. A block is only started if six more
// entries fit (a generated block and a retained block of three each), so an
// iteration never exceeds `iter_len` and no block is cut.
//
// Interface: `start` with `seed_len` (entries in the seed); output entries go
// to the global context (`out_valid`/`out_entry`), one per cycle at most;
// `bg_*` drives the block generator; `done` pulses when the iteration is
// built. `op_valid`/`op` report each decision.
//
// The three operations, their default probabilities and the remap of jump
// targets follow the paper; inserting (rather than replacing) on generation,
// the fill-up rule and the two-cycle entry rate are this design's choices.
module tf_mutation_engine
  import tf_pkg::*;
#(
  parameter logic [31:0] SEED = 32'hD1CE_0BAD
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [BLK_W:0]   seed_len,
  input  logic [4:0]       p_gen,
  input  logic [4:0]       p_del,
  input  logic [BLK_W:0]   iter_len,
  input  logic [BLK_W:0]   gc_instr_cnt,
  input  logic [BLK_W:0]   gc_blk_cnt,
  output logic             sd_rd_en,
  output logic [BLK_W-1:0] sd_rd_addr,
  input  entry_t           sd_rd_data,
  output logic             bg_start,
  input  logic             bg_last,
  output logic             out_valid,
  output entry_t           out_entry,
  output logic             remap_we,
  output logic [BLK_W-1:0] remap_old,
  output logic [BLK_W-1:0] remap_new,
  output logic             busy,
  output logic             done,
  output logic             op_valid,
  output mutop_e           op
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_PROC, S_GEN, S_EMIT, S_FILL, S_FILLW, S_DONE} state_e;
  state_e st;

  logic [BLK_W:0] ptr;
  entry_t         cur;
  mutop_e         cur_op;
  logic [31:0]    q;
  logic           draw;
  mutop_e         drawn;

  tf_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en(draw), .reseed(1'b0), .seed_val('0), .q(q));

  always_comb begin
    logic [4:0] r;
    r = {1'b0, q[3:0]};
    if (r < p_gen)                 drawn = OP_GEN;
    else if (r < p_gen + p_del)    drawn = OP_DEL;
    else                           drawn = OP_RET;
  end

  logic blk_fits, fill_fits;
  assign blk_fits  = (gc_instr_cnt + (BLK_W+1)'(6)) <= iter_len;
  assign fill_fits = (gc_instr_cnt + (BLK_W+1)'(3)) <= iter_len;

  assign draw     = (st == S_PROC) && sd_rd_data.first && blk_fits;
  assign op_valid = draw;
  assign op       = drawn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= S_IDLE;
      ptr    <= '0;
      cur    <= '0;
      cur_op <= OP_DEL;
    end else begin
      case (st)
        S_IDLE: if (start) begin
          ptr    <= '0;
          cur_op <= OP_DEL;
          st     <= S_RD;
        end
        S_RD: st <= (ptr >= seed_len) ? S_FILL : S_PROC;
        S_PROC: begin
          cur <= sd_rd_data;
          if (sd_rd_data.first) begin
            if (!blk_fits) st <= S_DONE;
            else begin
              cur_op <= drawn;
              case (drawn)
                OP_GEN:  st <= S_GEN;
                OP_RET:  st <= S_EMIT;
                default: begin ptr <= ptr + 1'b1; st <= S_RD; end
              endcase
            end
          end else if (cur_op == OP_RET) st <= S_EMIT;
          else begin ptr <= ptr + 1'b1; st <= S_RD; end
        end
        S_GEN: if (bg_last) begin
          cur_op <= OP_RET;
          st     <= S_EMIT;
        end
        S_EMIT: begin
          ptr <= ptr + 1'b1;
          st  <= S_RD;
        end
        S_FILL: st <= fill_fits ? S_FILLW : S_DONE;
        S_FILLW: if (bg_last) st <= S_FILL;
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign sd_rd_en   = (st == S_RD) && (ptr < seed_len);
  assign sd_rd_addr = ptr[BLK_W-1:0];
  assign bg_start   = ((st == S_PROC) && draw && drawn == OP_GEN) ||
                      ((st == S_FILL) && fill_fits);
  assign busy       = (st != S_IDLE);
  assign done       = (st == S_DONE);

  always_comb begin
    out_valid          = (st == S_EMIT);
    out_entry          = cur;
    out_entry.retained = 1'b1;
    out_entry.tgt_seed = cur.is_cf;
    remap_we           = (st == S_EMIT) && cur.first;
    remap_old          = cur.blk;
    remap_new          = gc_blk_cnt[BLK_W-1:0];
  end
endmodule

// tf_global_context: iteration buffer and global execution context.
//
// Collects the instruction blocks of the iteration being built and the
// context needed to resolve control flow once the iteration is complete:
//   * the cumulative instruction count (`instr_cnt`),
//   * the block count and the block base address table: the byte address
//     CODE_BASE + 4*position of the first instruction of every block,
//   * the remap table from a parent seed's block index to the block index it
//     received in this iteration (written by the mutation engine for retained
//     blocks; an entry never written means the block was deleted).
//
// `clear` starts a new iteration in one cycle. `app_valid` appends one entry
// per cycle at position `instr_cnt`; the buffer stamps the block index itself:
// an entry with `first` set opens block `blk_cnt` and records its base
// address, other entries belong to block `blk_cnt-1`. Appends beyond DEPTH are
// dropped and raise `overflow`. The entry read port is synchronous (data the
// cycle after `rd_en`); the base address and remap lookups are combinational.
// `code_end` is the address just past the last instruction, the code segment
// boundary.
//
// The instruction count, block base addresses and the recorded seed target
// indices follow the paper; the table organisation is this design's.
module tf_global_context
  import tf_pkg::*;
#(
  parameter int unsigned DEPTH     = 4096,
  parameter logic [31:0] CODE_BASE = 32'h8000_0000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             app_valid,
  input  entry_t           app_entry,
  input  logic             remap_we,
  input  logic [BLK_W-1:0] remap_old,
  input  logic [BLK_W-1:0] remap_new,
  input  logic             rd_en,
  input  logic [BLK_W-1:0] rd_addr,
  output entry_t           rd_entry,
  input  logic [BLK_W-1:0] base_idx0,
  output logic [31:0]      base_addr0,
  input  logic [BLK_W-1:0] base_idx1,
  output logic [31:0]      base_addr1,
  input  logic [BLK_W-1:0] remap_idx,
  output logic             remap_hit,
  output logic [BLK_W-1:0] remap_blk,
  output logic [BLK_W:0]   instr_cnt,
  output logic [BLK_W:0]   blk_cnt,
  output logic [31:0]      code_end,
  output logic             overflow
);
  entry_t           buf_mem  [DEPTH];
  logic [31:0]      base_tab [DEPTH];
  logic [BLK_W-1:0] remap_tab[DEPTH];
  logic [DEPTH-1:0] remap_v;

  logic   full;
  entry_t wr_e;

  assign full = (instr_cnt >= (BLK_W+1)'(DEPTH));

  always_comb begin
    wr_e     = app_entry;
    wr_e.blk = app_entry.first ? blk_cnt[BLK_W-1:0] : blk_cnt[BLK_W-1:0] - BLK_W'(1);
  end

  // Counters and flags.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      instr_cnt <= '0;
      blk_cnt   <= '0;
      remap_v   <= '0;
      overflow  <= 1'b0;
    end else if (clear) begin
      instr_cnt <= '0;
      blk_cnt   <= '0;
      remap_v   <= '0;
      overflow  <= 1'b0;
    end else begin
      if (app_valid && !full) begin
        instr_cnt <= instr_cnt + 1'b1;
        if (app_entry.first) blk_cnt <= blk_cnt + 1'b1;
      end
      if (app_valid && full) overflow <= 1'b1;
      if (remap_we) remap_v[remap_old] <= 1'b1;
    end
  end

  // Memories (no reset).
  always_ff @(posedge clk) begin
    if (app_valid && !full) begin
      buf_mem[instr_cnt[BLK_W-1:0]] <= wr_e;
      if (app_entry.first)
        base_tab[blk_cnt[BLK_W-1:0]] <= CODE_BASE + 32'({instr_cnt[BLK_W-1:0], 2'b00});
    end
    if (remap_we) remap_tab[remap_old] <= remap_new;
    if (rd_en) rd_entry <= buf_mem[rd_addr];
  end

  assign base_addr0 = base_tab[base_idx0];
  assign base_addr1 = base_tab[base_idx1];
  assign remap_hit  = remap_v[remap_idx];
  assign remap_blk  = remap_tab[remap_idx];
  assign code_end   = CODE_BASE + 32'({instr_cnt, 2'b00});
endmodule

// tf_corpus_storage: the seed memory.
//
// NUM_SEEDS+1 physical slots of SEED_LEN entries each, in one simple
// dual-port RAM (one write port, one synchronous read port; read data appear
// the cycle after `rd_en` and hold until the next read). The extra slot is the
// staging slot: the iteration being generated and run is written there while
// it streams to the processor, so it becomes a seed without being copied: the
// corpus manager only swaps slot numbers. Entry address = slot * SEED_LEN +
// index. Contents are not reset; the corpus manager's valid count decides
// which slots hold seeds.
//
// The paper keeps seeds in on-chip BRAM or in DDR; this is the BRAM variant.
// The number of seeds and their length are this design's choices (16 seeds of
// 4096 entries, enough for the 4000-instruction iterations).
module tf_corpus_storage
  import tf_pkg::*;
#(
  parameter int unsigned NUM_SEEDS = 16,
  parameter int unsigned SEED_LEN  = 4096,
  localparam int unsigned SLOTS    = NUM_SEEDS + 1,
  localparam int unsigned SLOT_W   = $clog2(SLOTS),
  localparam int unsigned IDX_W    = $clog2(SEED_LEN)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [SLOT_W-1:0] wr_slot,
  input  logic [IDX_W-1:0]  wr_idx,
  input  entry_t            wr_data,
  input  logic              rd_en,
  input  logic [SLOT_W-1:0] rd_slot,
  input  logic [IDX_W-1:0]  rd_idx,
  output entry_t            rd_data
);
  entry_t mem [SLOTS * SEED_LEN];

  always_ff @(posedge clk) begin
    if (we && (32'(wr_slot) < SLOTS)) mem[32'(wr_slot) * SEED_LEN + 32'(wr_idx)] <= wr_data;
    if (rd_en) rd_data <= mem[(32'(rd_slot) * SEED_LEN + 32'(rd_idx)) % (SLOTS * SEED_LEN)];
  end
endmodule

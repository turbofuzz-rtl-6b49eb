// tf_fuzz_context: the fuzzing context module, source of operand values.
//
// Holds two LFSRs and turns their state into the values the generator and
// operand assignment need: destination and source registers, a non-zero base
// register, 12- and 20-bit immediates, a 6-bit shift amount, a memory address
// and a bounded jump distance. Each `next` pulse draws a fresh set; outputs are
// combinational from the registered LFSR state.
//
// Memory-access restrictions: a store or AMO (`is_store`) always gets an
// address in the data region [DATA_BASE, DATA_BASE + 2^DATA_SIZE_LOG2). A load
// goes to the data region with probability mem_data_prob/16 (3/4 by default,
// as in the paper) and otherwise to the instruction region
// [CODE_BASE, CODE_BASE + 2^CODE_SIZE_LOG2). Addresses are 8-byte aligned so
// every access width is aligned. Jump-range limitation: generated control flow
// jumps forward by 1..JUMP_RANGE blocks. The region bases and sizes, the
// alignment, the forward-only direction and JUMP_RANGE are this design's own
// choices; the 3/4 split, the data-only stores and the bounded range follow
// the paper.
module tf_fuzz_context
  import tf_pkg::*;
#(
  parameter int unsigned JUMP_RANGE     = 4,
  parameter logic [31:0] CODE_BASE      = 32'h8000_0000,
  parameter int unsigned CODE_SIZE_LOG2 = 14,
  parameter logic [31:0] DATA_BASE      = 32'h8010_0000,
  parameter int unsigned DATA_SIZE_LOG2 = 16,
  parameter logic [31:0] SEED0          = 32'h1234_5678,
  parameter logic [31:0] SEED1          = 32'h9ABC_DEF1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        next,
  input  logic [4:0]  mem_data_prob,
  input  logic        is_store,
  output logic [4:0]  rd,
  output logic [4:0]  rs1,
  output logic [4:0]  rs2,
  output logic [4:0]  rb,
  output logic [11:0] imm12,
  output logic [19:0] imm20,
  output logic [5:0]  shamt,
  output logic [31:0] mem_addr,
  output logic        mem_is_data,
  output logic [BLK_W-1:0] jump_delta,
  output logic [63:0] rnd
);
  logic [31:0] q0, q1;

  tf_lfsr #(.SEED(SEED0)) u_l0 (.clk, .rst_n, .en(next), .reseed(1'b0), .seed_val('0), .q(q0));
  tf_lfsr #(.SEED(SEED1), .TAPS(32'hA300_0000)) u_l1 (.clk, .rst_n, .en(next), .reseed(1'b0),
                                                     .seed_val('0), .q(q1));

  assign rnd   = {q1, q0};
  assign rd    = q0[4:0];
  assign rs1   = q0[9:5];
  assign rs2   = q0[14:10];
  assign rb    = (q0[19:15] == 5'd0) ? 5'd5 : q0[19:15];
  assign imm12 = q1[11:0];
  assign imm20 = q1[31:12];
  assign shamt = q1[5:0];

  assign mem_is_data = is_store || ({1'b0, q0[23:20]} < mem_data_prob);

  always_comb begin
    logic [31:0] doff, coff;
    doff = '0;
    coff = '0;
    doff[DATA_SIZE_LOG2-1:3] = q1[DATA_SIZE_LOG2+12:16];
    coff[CODE_SIZE_LOG2-1:3] = q1[CODE_SIZE_LOG2+12:16];
    mem_addr = mem_is_data ? DATA_BASE + doff : CODE_BASE + coff;
  end

  assign jump_delta = BLK_W'(({28'd0, q0[27:24]} % JUMP_RANGE) + 1);
endmodule

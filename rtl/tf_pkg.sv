// tf_pkg: types and constants shared by the hardware fuzzer.
//
// The fuzzer moves instructions around as "entries". An entry is one 32-bit
// RISC-V instruction plus the bookkeeping the fuzzer needs to rebuild control
// flow after blocks are inserted or deleted: which block it belongs to, whether
// it starts its block, whether it is a control-flow instruction, and an
// auxiliary target (a block index for control flow, an absolute byte address
// for memory accesses). The same entry format is used in the iteration buffer,
// on the stimulus stream and in the seed memory, so a finished iteration can be
// stored as a seed without conversion.
//
// What follows the paper: a seed entry carries the instruction, its position
// in the iteration, its control-flow status and its branch target. The exact
// field widths, the operand classes and the "role" of affiliated instructions
// are this design's own choices.
package tf_pkg;

  // Block index / instruction position width: 4096 entries hold the
  // 4000-instruction iterations the fuzzer produces by default.
  localparam int unsigned BLK_W = 12;

  // Operand class of an instruction: tells operand assignment which fields to
  // fill. CL_RAW marks an instruction that must never be rewritten (deepExplore
  // intervals, which come complete from a real program, and the fixed FENCE
  // and FENCE.I words).
  typedef enum logic [3:0] {
    CL_R      = 4'd0,   // rd, rs1, rs2 (integer, M and F register ops)
    CL_I      = 4'd1,   // rd, rs1, imm12
    CL_SHIFT  = 4'd2,   // rd, rs1, shamt6
    CL_U      = 4'd3,   // rd, imm20
    CL_LOAD   = 4'd4,   // rd, base, offset (integer and FP loads)
    CL_STORE  = 4'd5,   // rs2, base, offset (integer and FP stores)
    CL_BRANCH = 4'd6,   // rs1, rs2, 13-bit offset
    CL_JAL    = 4'd7,   // rd, 21-bit offset
    CL_JALR   = 4'd8,   // rd, base, offset
    CL_AMO    = 4'd9,   // rd, rs2, base (address fully in base register)
    CL_CSR    = 4'd10,  // rd, rs1/uimm
    CL_RAW    = 4'd11,  // opaque, keep bit for bit
    CL_R1     = 4'd12,  // rd, rs1 (one-source FP ops; rs2 field is part of the opcode)
    CL_R4     = 4'd13   // rd, rs1, rs2, rs3 (fused multiply-add)
  } iclass_e;

  // Position of an entry inside its instruction block.
  typedef enum logic [1:0] {
    R_PRIME = 2'd0,     // the prime instruction
    R_AUIPC = 2'd1,     // affiliated: auipc base, %hi(target - block pc)
    R_ADDI  = 2'd2      // affiliated: addi base, base, %lo(target - block pc)
  } role_e;

  // Instruction subsets of the library (bit index into the enable mask).
  localparam int unsigned CAT_I = 0, CAT_M = 1, CAT_F = 2, CAT_A = 3, CAT_ZICSR = 4;
  localparam int unsigned NUM_CAT = 5;

  // Instruction library size, index width and the position of ADDI in it.
  localparam int LIB_N = 172, LIB_IW = 8, LIB_ADDI = 15;

  typedef struct packed {
    logic [31:0]      instr;
    iclass_e          cls;
    role_e            role;
    logic             first;     // first entry of its block
    logic             is_cf;     // control-flow block (branch, jal, jalr)
    logic [BLK_W-1:0] blk;       // block index within the iteration
    logic [31:0]      aux;       // cf: target block index; memory: byte address
    logic             tgt_seed;  // aux is a block index of the parent seed
    logic             retained;  // copied from a seed, keep its registers
  } entry_t;

  // Iteration source, also the corpus commit kind.
  typedef enum logic [1:0] {
    M_DIRECT = 2'd0,
    M_MUTATE = 2'd1,
    M_DEEP   = 2'd2
  } mode_e;

  // Block-level mutation operation.
  typedef enum logic [1:0] {
    OP_GEN = 2'd0,
    OP_DEL = 2'd1,
    OP_RET = 2'd2
  } mutop_e;

  // Run-time configuration (the fields an FPGA design would expose on a
  // virtual I/O core). Probabilities are numerators over 16, 0..16.
  typedef struct packed {
    logic [4:0]       mut_prob;       // mutation mode (rest: direct mode)
    logic [4:0]       p_gen;          // block generation
    logic [4:0]       p_del;          // block deletion (rest: retention)
    logic [4:0]       mem_data_prob;  // load goes to the data region
    logic [4:0]       sel_prio_prob;  // select the best seed (rest: random)
    logic [NUM_CAT-1:0] cat_en;       // enabled instruction subsets
    logic [BLK_W:0]   iter_len;       // instructions per iteration
  } tf_cfg_t;

  // One retired instruction as reported by the DUT or the reference model.
  typedef struct packed {
    logic [63:0] pc;
    logic [31:0] instr;
    logic [4:0]  rd;
    logic [63:0] wdata;
  } commit_t;

  // Defaults from the paper: mutation 7/16, generation 3/16, deletion 11/16,
  // data-region loads 3/4, best-seed selection 3/4, all subsets, 4000
  // instructions per iteration.
  localparam tf_cfg_t CFG_DEFAULT = '{
    mut_prob: 5'd7, p_gen: 5'd3, p_del: 5'd11, mem_data_prob: 5'd12,
    sel_prio_prob: 5'd12, cat_en: '1, iter_len: 13'd4000
  };

  localparam logic [31:0] OPC_AUIPC = 32'h0000_0017;
  localparam logic [31:0] OPC_ADDI  = 32'h0000_0013;
  localparam logic [31:0] INSN_NOP  = 32'h0000_0013;

endpackage

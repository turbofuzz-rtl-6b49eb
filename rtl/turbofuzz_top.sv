// turbofuzz_top: the programmable-logic part of the FPGA fuzzing framework.
//
// Closes the loop test generation -> execution -> coverage feedback in
// hardware, one iteration at a time:
//   1. Generate. Either the deepExplore engine (stage 1, while `deep_en` is
//      set and it has not finished) or the fuzzer produces the iteration. The
//      stimulus selector numbers the instructions; each one is written to the
//      instruction segment (`stim_*`, address CODE_BASE + 4*position) and to
//      the staging slot of the seed memory.
//      At the same time the data region is refilled with pseudo-random words
//      seeded by the iteration number (`dmem_*`, 8 bytes per cycle); the run
//      waits until both writes are finished.
//   2. Run. `run_start` tells the processor under test (outside this module)
//      to execute the iteration; it answers with `run_done`. Meanwhile the
//      instrumented processor presents the control registers of NUM_COV
//      modules on `cov_ctrl` with `cov_sample`, and the coverage blocks count
//      new points. Retired instructions of the processor and of the reference
//      emulator arrive on `dut_*`/`ref_*` and are compared one by one.
//   3. Feedback. The weighted new-point counts of all modules are summed into
//      the iteration's gain, which goes to the corpus manager (add, replace or
//      update the parent seed) and, in stage 1, to the deepExplore engine.
// A mismatch in the differential checker freezes the loop (`paused`), stops
// the stimulus stream and pulses `snap_trig` to take a hardware snapshot;
// `resume` continues.
//
// Outside this module: the processor (with its coverage instrumentation),
// the reference ISA emulator on the hard processor, DDR and the snapshot
// readback. Their signals are ports here. The block structure follows the
// paper's framework figure; the iteration handshake (`run_start`/`run_done`)
// and the port formats are this design's choices. All sizes default to the
// values given in the module headers of the blocks (4000-instruction
// iterations, 15-bit coverage indices, 16 seeds).
module turbofuzz_top
  import tf_pkg::*;
#(
  parameter int unsigned NUM_SEEDS      = 16,
  parameter int unsigned SEED_LEN       = 4096,
  parameter int unsigned ITER_DEPTH     = 4096,
  parameter int unsigned JUMP_RANGE     = 4,
  parameter int unsigned NUM_COV        = 4,
  parameter int unsigned COV_REGS       = 4,
  parameter int unsigned COV_REG_W [COV_REGS] = '{8, 6, 5, 7},
  parameter int          COV_SHIFT [NUM_COV]  = '{0, 0, 0, -1},
  parameter int unsigned MAX_STATE      = 15,
  parameter int unsigned NUM_INTERVALS  = 16,
  parameter int unsigned INTERVAL_LEN   = 1024,
  parameter int unsigned FIFO_DEPTH     = 16,
  parameter logic [31:0] CODE_BASE      = 32'h8000_0000,
  parameter logic [31:0] DATA_BASE      = 32'h8010_0000,
  parameter int unsigned DATA_SIZE_LOG2 = 16,
  localparam int unsigned COV_W  = cov_total_w(),
  localparam int unsigned KW     = $clog2(NUM_INTERVALS),
  localparam int unsigned LW     = $clog2(INTERVAL_LEN),
  localparam int unsigned SEL_W  = $clog2(NUM_SEEDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  tf_cfg_t         cfg,
  input  logic            run_en,
  input  logic            deep_en,
  input  logic [31:0]     mark_thresh,
  input  logic [31:0]     plateau_thresh,
  // deepExplore interval loading (from the host)
  input  logic            iv_we,
  input  logic [KW-1:0]   iv_sel,
  input  logic [LW-1:0]   iv_idx,
  input  logic [31:0]     iv_instr,
  input  logic            iv_init,
  input  logic            iv_len_we,
  input  logic [LW:0]     iv_len,
  input  logic [KW:0]     n_intervals,
  // stimulus to the instruction segment
  output logic            stim_valid,
  output logic [31:0]     stim_addr,
  output logic [31:0]     stim_instr,
  input  logic            stim_ready,
  // data region initialisation
  output logic            dmem_valid,
  output logic [31:0]     dmem_addr,
  output logic [63:0]     dmem_wdata,
  input  logic            dmem_ready,
  // processor run handshake
  output logic            run_start,
  input  logic            run_done,
  // coverage instrumentation of the processor
  input  logic            cov_sample,
  input  logic [NUM_COV-1:0][COV_W-1:0] cov_ctrl,
  // differential checking
  input  logic            dut_valid,
  input  commit_t         dut_rec,
  output logic            dut_ready,
  input  logic            ref_valid,
  input  commit_t         ref_rec,
  output logic            ref_ready,
  input  logic            resume,
  output logic            paused,
  output logic            snap_trig,
  output commit_t         mm_dut,
  output commit_t         mm_ref,
  // status
  output logic [31:0]     n_iter,
  output logic [31:0]     cov_total,
  output logic [31:0]     last_gain,
  output mode_e           last_mode,
  output logic [SEL_W:0]  corpus_count,
  output logic [1:0]      deep_stage,
  output logic            fb_valid,
  output logic [1:0]      corpus_act,
  output logic            corpus_act_valid,
  output logic            mut_op_valid,
  output mutop_e          mut_op,
  output logic [31:0]     n_fix,
  output logic [31:0]     n_checked
);
  function automatic int unsigned cov_total_w();
    int unsigned s = 0;
    for (int i = 0; i < COV_REGS; i++) s += COV_REG_W[i];
    return s;
  endfunction

  localparam int unsigned SLOT_W = $clog2(NUM_SEEDS + 1);
  localparam int unsigned IDX_W  = $clog2(SEED_LEN);

  typedef enum logic [2:0] {T_IDLE, T_BEGIN, T_GEN, T_DATA, T_RUN, T_WAIT, T_FB} tstate_e;
  tstate_e st;
  logic    src_deep;
  logic    iter_start;

  // ---------------- fuzzer ----------------
  logic             fz_start, fz_done, fz_valid, fz_ready, fz_busy, fz_ovf;
  entry_t           fz_entry, sd_rd_data;
  logic             seed_req, seed_ack, sd_rd_en;
  logic [BLK_W-1:0] sd_rd_addr;
  logic [BLK_W:0]   seed_len, fz_instrs;
  mode_e            fz_mode;

  tf_turbofuzzer #(.ITER_DEPTH(ITER_DEPTH), .JUMP_RANGE(JUMP_RANGE), .CODE_BASE(CODE_BASE),
                   .DATA_BASE(DATA_BASE), .DATA_SIZE_LOG2(DATA_SIZE_LOG2)) u_fuzzer (
    .clk, .rst_n, .cfg, .start(fz_start), .corpus_nonempty(corpus_count != '0),
    .seed_req, .seed_ack, .seed_len, .sd_rd_en, .sd_rd_addr, .sd_rd_data,
    .out_valid(fz_valid), .out_entry(fz_entry), .out_ready(fz_ready),
    .busy(fz_busy), .done(fz_done), .mode(fz_mode), .op_valid(mut_op_valid), .op(mut_op),
    .n_fix, .iter_instrs(fz_instrs), .overflow(fz_ovf));

  // ---------------- corpus ----------------
  logic             s_valid, s_ready, s_fire;
  entry_t           s_entry;
  logic [BLK_W-1:0] s_pos;
  logic [BLK_W:0]   iter_count;
  logic [SEL_W-1:0]  sel_seed;
  logic [SLOT_W-1:0] sel_slot, staging;
  logic              sel_prio, commit;
  logic [31:0]       gain;

  tf_corpus_manager #(.NUM_SEEDS(NUM_SEEDS)) u_cm (
    .clk, .rst_n, .sel_prio_prob(cfg.sel_prio_prob), .sel_req(seed_req), .sel_ack(seed_ack),
    .sel_seed, .sel_slot, .sel_len(seed_len), .sel_prio, .staging,
    .commit, .commit_mode(src_deep ? M_DEEP : fz_mode), .commit_parent(sel_seed),
    .commit_gain(gain), .commit_len(iter_count), .act_valid(corpus_act_valid), .act(corpus_act),
    .count(corpus_count));


  tf_corpus_storage #(.NUM_SEEDS(NUM_SEEDS), .SEED_LEN(SEED_LEN)) u_cs (
    .clk, .we(s_fire), .wr_slot(staging), .wr_idx(IDX_W'(s_pos)), .wr_data(s_entry),
    .rd_en(sd_rd_en), .rd_slot(sel_slot), .rd_idx(IDX_W'(sd_rd_addr)), .rd_data(sd_rd_data));

  // ---------------- deepExplore ----------------
  logic   de_ready_it, de_iter_start, de_valid, de_last, de_ready, de_phase;
  entry_t de_entry;
  logic [KW-1:0] de_cur;
  logic [KW:0]   de_marked;

  tf_deepexplore #(.NUM_INTERVALS(NUM_INTERVALS), .INTERVAL_LEN(INTERVAL_LEN)) u_de (
    .clk, .rst_n, .iv_we, .iv_sel, .iv_idx, .iv_instr, .iv_init, .iv_len_we, .iv_len, .n_intervals,
    .enable(deep_en && run_en), .mark_thresh, .plateau_thresh, .stage(deep_stage),
    .phase_refine(de_phase), .ready(de_ready_it), .iter_start(de_iter_start), .cur_interval(de_cur),
    .out_valid(de_valid), .out_entry(de_entry), .out_last(de_last), .out_ready(de_ready),
    .fb_valid(fb_valid && src_deep), .fb_gain(gain), .n_marked(de_marked));

  // ---------------- stimulus selection ----------------
  logic [31:0] n_fuzz, n_deep;

  tf_stimuli_select #(.CODE_BASE(CODE_BASE)) u_sel (
    .clk, .rst_n, .iter_start, .sel_deep(src_deep),
    .fz_valid, .fz_entry, .fz_ready, .de_valid, .de_entry, .de_ready,
    .out_valid(s_valid), .out_entry(s_entry), .out_pos(s_pos), .out_addr(stim_addr),
    .out_ready(s_ready), .iter_count, .n_fuzz, .n_deep);

  assign s_ready    = stim_ready && !paused && (st == T_GEN);
  assign s_fire     = s_valid && s_ready;
  assign stim_valid = s_valid && !paused && (st == T_GEN);
  assign stim_instr = s_entry.instr;

  // ---------------- data region ----------------
  logic di_valid, di_busy;

  tf_data_init #(.DATA_BASE(DATA_BASE), .DATA_SIZE_LOG2(DATA_SIZE_LOG2)) u_di (
    .clk, .rst_n, .start(iter_start), .iter_id(n_iter), .wr_valid(di_valid), .wr_addr(dmem_addr),
    .wr_data(dmem_wdata), .wr_ready(dmem_ready && !paused), .busy(di_busy), .done());

  assign dmem_valid = di_valid && !paused;

  // ---------------- coverage ----------------
  logic [NUM_COV-1:0] cov_busy;
  logic [31:0]        cov_w   [NUM_COV];
  logic [31:0]        cov_tot [NUM_COV];

  for (genvar m = 0; m < NUM_COV; m++) begin : g_cov
    tf_cov_instrument #(.NUM_REGS(COV_REGS), .REG_W(COV_REG_W), .MAX_STATE(MAX_STATE),
                        .SHIFT(COV_SHIFT[m])) u_cov (
      .clk, .rst_n, .clear(1'b0), .iter_start, .sample(cov_sample), .ctrl(cov_ctrl[m]),
      .busy(cov_busy[m]), .index(), .n_cov_iter(), .n_cov_weighted(cov_w[m]),
      .n_cov_total(cov_tot[m]));
  end

  always_comb begin
    gain      = '0;
    cov_total = '0;
    for (int m = 0; m < NUM_COV; m++) begin
      gain      += cov_w[m];
      cov_total += cov_tot[m];
    end
  end

  // ---------------- differential checking ----------------
  tf_diff_checker #(.FIFO_DEPTH(FIFO_DEPTH)) u_chk (
    .clk, .rst_n, .dut_valid, .dut_rec, .dut_ready, .ref_valid, .ref_rec, .ref_ready,
    .resume, .paused, .snap_trig, .mm_dut, .mm_ref, .n_checked, .n_mismatch());

  // ---------------- iteration control ----------------
  logic deep_active;
  assign deep_active   = deep_en && (deep_stage != 2'd2);
  assign fz_start      = (st == T_BEGIN) && !paused && !deep_active;
  assign de_iter_start = (st == T_BEGIN) && !paused && deep_active && de_ready_it;
  assign iter_start    = fz_start || de_iter_start;
  assign run_start     = (st == T_RUN);
  assign commit        = (st == T_FB);
  assign fb_valid      = (st == T_FB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= T_IDLE;
      src_deep  <= 1'b0;
      n_iter    <= '0;
      last_gain <= '0;
      last_mode <= M_DIRECT;
    end else if (!paused) begin
      case (st)
        T_IDLE:  if (run_en && cov_busy == '0) st <= T_BEGIN;
        T_BEGIN: begin
          if (fz_start)      begin src_deep <= 1'b0; st <= T_GEN; end
          if (de_iter_start) begin src_deep <= 1'b1; st <= T_GEN; end
        end
        T_GEN: if (src_deep ? (s_fire && de_last) : fz_done) st <= T_DATA;
        T_DATA: if (!di_busy) st <= T_RUN;
        T_RUN:  st <= T_WAIT;
        T_WAIT: if (run_done) st <= T_FB;
        T_FB: begin
          n_iter    <= n_iter + 1'b1;
          last_gain <= gain;
          last_mode <= src_deep ? M_DEEP : fz_mode;
          st        <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule

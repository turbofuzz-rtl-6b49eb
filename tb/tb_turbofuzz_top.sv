// tb_turbofuzz_top: end-to-end test of the whole fuzzing loop at the default
// sizes (4000-instruction iterations, 16 seeds, four 15-bit coverage
// modules, 16 interval slots of 1024 words).
//
// The testbench plays the parts outside the programmable-logic fuzzer:
//   * instruction segment: stimulus writes are stored by address (random
//     write stalls); every address must be CODE_BASE + 4*position, in order;
//   * processor and reference emulator: on `run_start` both retire the
//     iteration's instructions in program order, each as a commit record
//     {pc, instr, rd, wdata} with random gaps and back-pressure. The
//     processor model has an injected bug: a MULHU whose pc has bits [4:2]
//     equal to zero writes a wrong value, so the checker must catch it;
//   * coverage instrumentation: each processor commit samples four modules
//     whose control registers are built from the instruction, the previous
//     instruction, the pc and the written value;
//   * host: loads 4 deepExplore intervals of 256 words (initialisation
//     ADDI/LUI words followed by ordinary arithmetic), answers each snapshot
//     by `resume` after a short delay, and raises `run_done` when every
//     record of the iteration has been compared.
//   * data memory: the data-region writes (`dmem_*`) are checked for order,
//     count (8192 words) and the per-iteration seed before each run.
// Checks: addresses, iteration lengths (fuzzer iterations at most 4000 and
// within one block of it), every snapshot pair differs and comes from the
// injected bug, no record is lost (checked + mismatched = retired).
// Mechanism counters (each must be non-zero at the end or the test fails):
// direct and mutation iterations; generation, deletion and retention
// operations; corpus add, replace, update and reject; deepExplore play and
// refine iterations; the switch to stage 2; mismatches with snapshots and
// resumes; validation repairs; iterations with new coverage; data-region
// refills (one per iteration); stalls of the stimulus and data-memory ports.
module tb_turbofuzz_top;
  import tf_pkg::*;
  import tb_rv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #100000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  localparam logic [31:0] CB = 32'h8000_0000;
  localparam int NINT = 4, ILEN = 256;

  tf_cfg_t cfg;
  logic run_en = 0, deep_en = 0;
  logic [31:0] mark_thresh = 32'd300, plateau_thresh = 32'd200;
  logic iv_we = 0, iv_init = 0, iv_len_we = 0;
  logic [3:0] iv_sel = 0;
  logic [9:0] iv_idx = 0;
  logic [31:0] iv_instr = 0;
  logic [10:0] iv_len = 0;
  logic [4:0] n_intervals = 5'(NINT);
  logic stim_valid, stim_ready = 1, run_start, run_done = 0, cov_sample = 0;
  logic dmem_valid, dmem_ready = 1;
  logic [31:0] dmem_addr;
  logic [63:0] dmem_wdata;
  logic [31:0] stim_addr, stim_instr;
  logic [3:0][25:0] cov_ctrl = '0;
  logic dut_valid = 0, ref_valid = 0, dut_ready, ref_ready, resume = 0, paused, snap_trig;
  commit_t dut_rec = '0, ref_rec = '0, mm_dut, mm_ref;
  logic [31:0] n_iter, cov_total, last_gain, n_fix, n_checked;
  mode_e last_mode;
  logic [4:0] corpus_count;
  logic [1:0] deep_stage, corpus_act;
  logic fb_valid, corpus_act_valid, mut_op_valid;
  mutop_e mut_op;

  turbofuzz_top dut (.clk, .rst_n, .cfg, .run_en, .deep_en, .mark_thresh, .plateau_thresh,
    .iv_we, .iv_sel, .iv_idx, .iv_instr, .iv_init, .iv_len_we, .iv_len, .n_intervals,
    .stim_valid, .stim_addr, .stim_instr, .stim_ready, .dmem_valid, .dmem_addr, .dmem_wdata,
    .dmem_ready, .run_start, .run_done, .cov_sample,
    .cov_ctrl, .dut_valid, .dut_rec, .dut_ready, .ref_valid, .ref_rec, .ref_ready, .resume,
    .paused, .snap_trig, .mm_dut, .mm_ref, .n_iter, .cov_total, .last_gain, .last_mode,
    .corpus_count, .deep_stage, .fb_valid, .corpus_act, .corpus_act_valid, .mut_op_valid,
    .mut_op, .n_fix, .n_checked);

  // ---------------- instruction segment ----------------
  logic [31:0] imem [4096];
  int wr_pos = 0;
  always @(negedge clk) stim_ready = $urandom_range(0, 7) !== 0;
  always @(posedge clk) if (rst_n && stim_valid && stim_ready) begin
    chk(stim_addr === CB + 32'(4 * wr_pos), "stimulus address in order");
    imem[wr_pos] = stim_instr;
    wr_pos++;
  end

  // ---------------- data region ----------------
  int d_pos = 0, n_refill = 0;
  logic [63:0] d_first;
  always @(negedge clk) dmem_ready = $urandom_range(0, 5) != 0;
  always @(posedge clk) if (rst_n && dmem_valid && dmem_ready) begin
    chk(dmem_addr === 32'h8010_0000 + 32'(8 * d_pos), "data address in order");
    if (d_pos === 0) d_first = dmem_wdata;
    d_pos++;
  end

  // ---------------- processor / reference models ----------------
  function automatic logic [63:0] result_of(input logic [31:0] pc, input logic [31:0] w);
    logic [63:0] h;
    h = {pc, w} * 64'h9E37_79B9_7F4A_7C15;
    return h ^ (h >> 29);
  endfunction
  function automatic bit bug_hits(input logic [31:0] pc, input logic [31:0] w);
    return w[6:0] === 7'h33 && w[31:25] === 7'h01 && w[14:12] === 3'b011 && pc[4:2] === 3'b000;
  endfunction
  function automatic commit_t rec_of(input int i, input bit is_dut);
    commit_t r;
    logic [31:0] pc;
    pc = CB + 32'(4 * i);
    r.pc = {32'h0, pc}; r.instr = imem[i]; r.rd = imem[i][11:7];
    r.wdata = result_of(pc, imem[i]);
    if (is_dut && bug_hits(pc, imem[i])) r.wdata ^= 64'h1;
    return r;
  endfunction

  bit running = 0;
  int run_n = 0, di = 0, ri = 0, n_bug_expected = 0, retired_total = 0;
  logic [31:0] prev_w = 0;
  always @(negedge clk) if (rst_n) begin
    dut_valid = running && di < run_n && ($urandom_range(0, 4) !== 0);
    ref_valid = running && ri < run_n && ($urandom_range(0, 2) !== 0);
    if (dut_valid) dut_rec = rec_of(di, 1);
    if (ref_valid) ref_rec = rec_of(ri, 0);
    cov_sample = dut_valid && dut_ready;
    if (cov_sample) begin
      logic [31:0] w;
      w = dut_rec.instr;
      cov_ctrl[0] = {w[31:25], w[14:12], w[6:2], prev_w[6:2], prev_w[14:12], 3'b0};
      cov_ctrl[1] = {w[19:15], w[24:20], w[11:7], dut_rec.pc[12:2]};
      cov_ctrl[2] = dut_rec.wdata[25:0];
      cov_ctrl[3] = {w[31:20] ^ prev_w[31:20], w[6:0], prev_w[6:0]};
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dut_valid && dut_ready) begin
      if (bug_hits(dut_rec.pc[31:0], dut_rec.instr)) n_bug_expected++;
      prev_w = dut_rec.instr;
      di++;
    end
    if (ref_valid && ref_ready) ri++;
  end

  // ---------------- snapshots ----------------
  int n_snap = 0, n_resume = 0;
  always @(posedge clk) if (rst_n && snap_trig) begin
    n_snap++;
    chk(mm_dut !== mm_ref && mm_dut.pc === mm_ref.pc && bug_hits(mm_ref.pc[31:0], mm_ref.instr),
        "snapshot pair comes from the injected bug");
  end
  initial forever begin
    @(negedge clk);
    if (paused && !resume) begin
      repeat ($urandom_range(2, 40)) @(negedge clk);
      resume = 1; @(negedge clk); resume = 0; n_resume++;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_direct = 0, n_mut = 0, n_deep_play = 0, n_deep_refine = 0, n_gain = 0;
  int n_op [3], n_act [4];
  int n_stim_stall = 0, n_dmem_stall = 0;
  bit stage2_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if (stim_valid && !stim_ready) n_stim_stall++;
    if (dmem_valid && !dmem_ready) n_dmem_stall++;
    if (mut_op_valid) n_op[int'(mut_op)]++;
    if (corpus_act_valid) n_act[int'(corpus_act)]++;
    if (deep_stage === 2'd2) stage2_seen = 1;
  end

  // ---------------- host ----------------
  task automatic load_intervals();
    for (int k = 0; k < NINT; k++) begin
      for (int i = 0; i < ILEN; i++) begin
        logic [31:0] w;
        bit ini;
        w = $urandom();
        ini = i < 32;
        if (ini) w = (i % 2) ? {w[31:12], w[11:7], 7'h37} : {w[31:15], 3'b000, w[11:7], 7'h13};
        else case ($urandom_range(0, 3))
          0: w = {7'h01, w[24:15], 3'b011, w[11:7], 7'h33};   // mulhu
          1: w = {7'h00, w[24:15], 3'b000, w[11:7], 7'h33};   // add
          2: w = {w[31:15], 3'b100, w[11:7], 7'h13};          // xori
          default: w = {7'h00, w[24:15], 3'b111, w[11:7], 7'h33};  // and
        endcase
        @(negedge clk); iv_we = 1; iv_sel = 4'(k); iv_idx = 10'(i); iv_instr = w; iv_init = ini;
      end
      @(negedge clk); iv_we = 0; iv_len_we = 1; iv_sel = 4'(k); iv_len = 11'(ILEN);
      @(negedge clk); iv_len_we = 0;
    end
  endtask

  initial begin
    int it, len;
    cfg = CFG_DEFAULT;
    repeat (3) @(posedge clk); rst_n = 1;
    load_intervals();
    deep_en = 1; run_en = 1;
    it = 0;
    while (it < 400) begin
      mode_e m;
      bit deep_it, refine_it;
      // Generation: wait for the run request.
      wr_pos = 0; d_pos = 0;
      while (!run_start) @(negedge clk);
      chk(d_pos === 8192, $sformatf("data region refilled before the run (%0d words)", d_pos));
      chk(d_first === {32'(it) * 32'h9E37_79B9, 32'(it) ^ 32'h5851_F42D}, "data seeded by the iteration number");
      if (d_pos === 8192) n_refill++;
      deep_it = dut.src_deep;
      refine_it = dut.de_phase;
      len = wr_pos;
      m = deep_it ? M_DEEP : dut.fz_mode;
      if (deep_it) begin
        chk(len === ILEN, "deepExplore iteration is one interval");
        if (refine_it) n_deep_refine++; else n_deep_play++;
      end else begin
        chk(len <= int'(cfg.iter_len) && len >= int'(cfg.iter_len) - 5, $sformatf("iteration length %0d", len));
        if (m === M_DIRECT) n_direct++; else n_mut++;
      end
      // Run: both models retire the iteration, then run_done.
      run_n = len; di = 0; ri = 0; running = 1;
      while (!(di === run_n && ri === run_n && int'(n_checked) + n_snap === retired_total + run_n && !paused))
        @(negedge clk);
      running = 0;
      retired_total += run_n;
      run_done = 1; @(negedge clk); run_done = 0;
      while (!fb_valid) @(negedge clk);
      if (dut.gain !== 0) n_gain++;
      @(negedge clk);
      chk(last_mode === m, "mode recorded");
      it++;
      if (it % 10 === 0)
        $display("iter %0d stage %0d corpus %0d cov %0d gain %0d fixes %0d snaps %0d",
                 it, deep_stage, corpus_count, cov_total, last_gain, n_fix, n_snap);
      if (n_direct + n_mut >= 60 && stage2_seen && n_direct > 0 && n_mut > 0 && n_act[2] > 0 && n_act[0] > 0
          && n_fix > 0 && n_snap > 0) break;
    end
    $display("iterations %0d: direct %0d mutate %0d deep play %0d refine %0d", it, n_direct, n_mut,
             n_deep_play, n_deep_refine);
    $display("ops gen %0d del %0d ret %0d; corpus reject %0d add %0d replace %0d update %0d",
             n_op[OP_GEN], n_op[OP_DEL], n_op[OP_RET], n_act[0], n_act[1], n_act[2], n_act[3]);
    $display("checked %0d snapshots %0d (expected %0d) resumes %0d fixes %0d gain-iters %0d cov %0d",
             n_checked, n_snap, n_bug_expected, n_resume, n_fix, n_gain, cov_total);
    $display("stalls: stimulus %0d data memory %0d", n_stim_stall, n_dmem_stall);
    chk(n_direct > 0, "direct mode used");
    chk(n_mut > 0, "mutation mode used");
    chk(n_op[OP_GEN] > 0 && n_op[OP_DEL] > 0 && n_op[OP_RET] > 0, "gen/del/ret used");
    chk(n_act[1] > 0 && n_act[2] > 0 && n_act[3] > 0 && n_act[0] > 0, "corpus add/replace/update/reject");
    chk(n_deep_play > 0 && n_deep_refine > 0, "deepExplore play and refine");
    chk(stage2_seen, "switch to stage 2");
    chk(n_snap > 0 && n_snap === n_bug_expected && n_resume === n_snap, "every bug caught, snapshot, resume");
    chk(int'(n_checked) + n_snap === retired_total, "no record lost");
    chk(n_fix > 0, "validation repairs");
    chk(n_gain > 0, "new coverage found");
    chk(n_refill === it, "data region refilled every iteration");
    chk(n_stim_stall > 0 && n_dmem_stall > 0, "stimulus and data-memory stalls");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tf_mutation_engine: runs the mutation engine with the real block
// generator and global context on a seed built by the testbench.
//   all-retain (p_gen = p_del = 0): the iteration starts with an exact copy of
//     the seed, every block remapped to its own index, then generated blocks
//     fill it up to the target length;
//   all-delete (p_del = 16): no seed instruction survives;
//   defaults (3/16, 11/16, 2/16): the decision counts follow the
//     probabilities, every retained block is a complete copy of its seed
//     block, the remap table points at it, control-flow copies carry
//     tgt_seed, and the iteration never exceeds the target length.
module tb_tf_mutation_engine;
  import tf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // seed memory model
  entry_t seed [4096];
  int     seed_len, seed_blocks, seed_blen [4096], seed_start [4096];
  logic   sd_rd_en; logic [BLK_W-1:0] sd_rd_addr; entry_t sd_rd_data;
  always_ff @(posedge clk) if (sd_rd_en) sd_rd_data <= seed[sd_rd_addr];

  logic start = 0, bg_start, bg_valid, bg_last, bg_busy, me_valid, remap_we, busy, done, op_valid;
  logic [4:0] p_gen = 3, p_del = 11;
  logic [BLK_W:0] iter_len = 13'd1000, instr_cnt, blk_cnt;
  entry_t me_entry, bg_entry, rd_entry;
  logic [BLK_W-1:0] remap_old, remap_new, remap_idx = '0, remap_blk, rd_addr = '0;
  logic remap_hit, rd_en = 0, clear = 0, ovf;
  logic [31:0] code_end, ba0, ba1;
  mutop_e op;

  tf_mutation_engine dut (
    .clk, .rst_n, .start, .seed_len(13'(seed_len)), .p_gen, .p_del, .iter_len,
    .gc_instr_cnt(instr_cnt), .gc_blk_cnt(blk_cnt), .sd_rd_en, .sd_rd_addr, .sd_rd_data,
    .bg_start, .bg_last(bg_valid && bg_last), .out_valid(me_valid), .out_entry(me_entry),
    .remap_we, .remap_old, .remap_new, .busy, .done, .op_valid, .op);
  tf_block_gen u_bg (.clk, .rst_n, .start(bg_start), .cat_en('1), .mem_data_prob(5'd12),
    .cur_blk(blk_cnt[BLK_W-1:0]), .busy(bg_busy), .out_valid(bg_valid), .out_entry(bg_entry),
    .out_last(bg_last));
  tf_global_context u_gc (.clk, .rst_n, .clear, .app_valid(bg_valid || me_valid),
    .app_entry(bg_valid ? bg_entry : me_entry), .remap_we, .remap_old, .remap_new, .rd_en, .rd_addr,
    .rd_entry, .base_idx0('0), .base_addr0(ba0), .base_idx1('0), .base_addr1(ba1), .remap_idx,
    .remap_hit, .remap_blk, .instr_cnt, .blk_cnt, .code_end, .overflow(ovf));

  int n_ops [3];
  always @(posedge clk) if (op_valid) n_ops[int'(op)]++;

  task automatic build_seed(input int nb);
    int p; p = 0;
    for (int b = 0; b < nb; b++) begin
      int l; l = 1 + ((b * 5 + 1) % 3);
      seed_blen[b] = l; seed_start[b] = p;
      for (int i = 0; i < l; i++) begin
        seed[p] = '0;
        seed[p].instr = 32'hA000_0000 | 32'(b << 8) | 32'(i);
        seed[p].first = (i === 0);
        seed[p].blk   = BLK_W'(b);
        seed[p].is_cf = (b % 4 === 0);
        seed[p].aux   = 32'((b + 2) % nb);
        seed[p].cls   = (b % 4 === 0) ? CL_BRANCH : CL_R;
        p++;
      end
    end
    seed_len = p; seed_blocks = nb;
  endtask

  entry_t it [$];
  task automatic run_and_read();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    it.delete();
    for (int p = 0; p < int'(instr_cnt); p++) begin
      rd_en = 1; rd_addr = BLK_W'(p); @(negedge clk); rd_en = 0; #1;
      it.push_back(rd_entry);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    build_seed(300);
    // all retain
    p_gen = 0; p_del = 0;
    run_and_read();
    chk(int'(instr_cnt) <= 1000 && int'(instr_cnt) >= 998, "filled to target length");
    for (int p = 0; p < seed_len; p++)
      chk(it[p].instr === seed[p].instr && it[p].retained && it[p].tgt_seed === seed[p].is_cf
          && it[p].blk === seed[p].blk, "exact copy");
    for (int p = seed_len; p < int'(instr_cnt); p++) chk(!it[p].retained, "fill is generated");
    for (int b = 0; b < seed_blocks; b++) begin
      remap_idx = BLK_W'(b); #1; chk(remap_hit && remap_blk === BLK_W'(b), "identity remap");
    end
    // all delete
    p_gen = 0; p_del = 16;
    run_and_read();
    foreach (it[p]) chk(!it[p].retained, "nothing retained");
    remap_idx = 0; #1; chk(!remap_hit, "no remap after delete");
    // defaults, several runs
    p_gen = 3; p_del = 11;
    n_ops = '{0, 0, 0};
    for (int r = 0; r < 6; r++) begin
      int last_old;
      run_and_read();
      chk(int'(instr_cnt) <= 1000, "never exceeds target");
      last_old = -1;
      foreach (it[p]) if (it[p].retained && it[p].first) begin
        int ob; ob = (it[p].instr >> 8) & 32'hFFF;
        chk(ob > last_old, "retained blocks stay in order");
        last_old = ob;
        for (int i = 0; i < seed_blen[ob]; i++)
          chk(it[p + i].instr === seed[seed_start[ob] + i].instr && it[p + i].retained
              && int'(it[p + i].blk) === int'(it[p].blk), "complete block copy");
        remap_idx = BLK_W'(ob); #1;
        chk(remap_hit && remap_blk === it[p].blk, "remap to new block");
        chk(it[p].tgt_seed === (ob % 4 === 0), "tgt_seed on control flow");
      end
    end
    $display("ops gen=%0d del=%0d ret=%0d", n_ops[0], n_ops[1], n_ops[2]);
    begin
      int tot; tot = n_ops[0] + n_ops[1] + n_ops[2];
      chk(tot > 500, "enough decisions");
      chk(n_ops[0] * 16 > tot * 2 && n_ops[0] * 16 < tot * 4, "generation about 3/16");
      chk(n_ops[1] * 16 > tot * 10 && n_ops[1] * 16 < tot * 12, "deletion about 11/16");
      chk(n_ops[2] * 16 > tot * 1 && n_ops[2] * 16 < tot * 3, "retention about 2/16");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

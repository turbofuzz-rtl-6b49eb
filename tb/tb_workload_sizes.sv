// tb_workload_sizes: runs the sizes the design is meant to be used at, with
// every block parameter at its default.
//
// Iteration length: the fuzzer IP builds 8 iterations of 1000 instructions
// and then 4 of 4000 (the two lengths of the published evaluation), each one
// kept as the seed of the next so that mutation mode takes part. Every
// iteration must stay within its length and at most one block short of it,
// match the reported instruction count, use only legal major opcodes and not
// overflow the iteration buffer; the cycles per iteration are printed.
//
// Coverage index size: three coverage units with the default register widths
// (8, 6, 5, 7) and MAX_STATE 13, 14 and 15 (the three published
// configurations). Each must take 2^MAX_STATE cycles to clear its map, fold
// random control values as "control bit k goes to index bit k mod MAX_STATE",
// and reach every one of its 2^MAX_STATE points when the control value sweeps
// 0 .. 2^15-1.
module tb_workload_sizes;
  import tf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---------------- fuzzer at 1000 and 4000 instructions ----------------
  tf_cfg_t cfg;
  logic start = 0, corpus_nonempty = 0, seed_req, seed_ack = 0;
  logic [BLK_W:0] seed_len = '0, iter_instrs;
  logic sd_rd_en, out_valid, out_ready = 1, busy, done, op_valid, overflow;
  logic [BLK_W-1:0] sd_rd_addr;
  entry_t sd_rd_data = '0, out_entry;
  mode_e mode;
  mutop_e op;
  logic [31:0] n_fix;

  tf_turbofuzzer dut (.clk, .rst_n, .cfg, .start, .corpus_nonempty, .seed_req, .seed_ack, .seed_len,
    .sd_rd_en, .sd_rd_addr, .sd_rd_data, .out_valid, .out_entry, .out_ready, .busy, .done, .mode,
    .op_valid, .op, .n_fix, .iter_instrs, .overflow);

  entry_t seed [4096];
  entry_t cur [$];
  always_ff @(posedge clk) if (sd_rd_en) sd_rd_data <= seed[sd_rd_addr];
  always_ff @(posedge clk) seed_ack <= seed_req;

  function automatic bit legal(input logic [31:0] w);
    return w[1:0] === 2'b11 && w[6:0] inside {7'h03, 7'h07, 7'h0F, 7'h13, 7'h17, 7'h1B, 7'h23,
      7'h27, 7'h2F, 7'h33, 7'h37, 7'h3B, 7'h43, 7'h47, 7'h4B, 7'h4F, 7'h53, 7'h63, 7'h67, 7'h6F,
      7'h73};
  endfunction

  int n_mode [3];
  task automatic run_iters(input int len, input int count);
    int cycles, bad;
    cfg.iter_len = 13'(len);
    for (int it = 0; it < count; it++) begin
      cur.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cycles = 1;
      while (!done) begin
        #1;
        if (out_valid && out_ready) cur.push_back(out_entry);
        @(negedge clk); cycles++;
      end
      n_mode[int'(mode)]++;
      chk(cur.size() <= len && cur.size() >= len - 5, $sformatf("length %0d of %0d", cur.size(), len));
      chk(cur.size() === int'(iter_instrs), "length matches instruction count");
      chk(!overflow, "no buffer overflow");
      bad = 0;
      foreach (cur[p]) if (!legal(cur[p].instr)) bad++;
      chk(bad === 0, $sformatf("%0d illegal opcodes", bad));
      $display("iter_len %0d: %0s, %0d instructions, %0d cycles", len,
               mode == M_MUTATE ? "mutation" : "direct", cur.size(), cycles);
      foreach (cur[p]) seed[p] = cur[p];
      seed_len = (BLK_W+1)'(cur.size());
      corpus_nonempty = 1;
    end
  endtask

  // ---------------- coverage units at 13, 14 and 15 bits ----------------
  localparam int TW = 26;   // 8 + 6 + 5 + 7
  logic c_clear = 0, c_iter = 0, c_sample = 0;
  logic [TW-1:0] c_ctrl = '0;
  logic [2:0] c_busy;
  logic [12:0] idx13;
  logic [13:0] idx14;
  logic [14:0] idx15;
  logic [31:0] tot [3], iter_n [3], w [3];

  tf_cov_instrument #(.MAX_STATE(13)) u_c13 (.clk, .rst_n, .clear(c_clear), .iter_start(c_iter),
    .sample(c_sample), .ctrl(c_ctrl), .busy(c_busy[0]), .index(idx13), .n_cov_iter(iter_n[0]),
    .n_cov_weighted(w[0]), .n_cov_total(tot[0]));
  tf_cov_instrument #(.MAX_STATE(14)) u_c14 (.clk, .rst_n, .clear(c_clear), .iter_start(c_iter),
    .sample(c_sample), .ctrl(c_ctrl), .busy(c_busy[1]), .index(idx14), .n_cov_iter(iter_n[1]),
    .n_cov_weighted(w[1]), .n_cov_total(tot[1]));
  tf_cov_instrument u_c15 (.clk, .rst_n, .clear(c_clear), .iter_start(c_iter),
    .sample(c_sample), .ctrl(c_ctrl), .busy(c_busy[2]), .index(idx15), .n_cov_iter(iter_n[2]),
    .n_cov_weighted(w[2]), .n_cov_total(tot[2]));

  function automatic logic [14:0] fold(input logic [TW-1:0] c, input int ms);
    logic [14:0] r = '0;
    for (int k = 0; k < TW; k++) r[k % ms] ^= c[k];
    return r;
  endfunction

  int clear_cycles [3];
  always @(posedge clk) if (rst_n) for (int i = 0; i < 3; i++) if (c_busy[i]) clear_cycles[i]++;

  initial begin
    cfg = CFG_DEFAULT;
    repeat (3) @(posedge clk); rst_n = 1;

    run_iters(1000, 8);
    run_iters(4000, 4);
    chk(n_mode[M_DIRECT] > 0 && n_mode[M_MUTATE] > 0, "both modes at full size");

    // the maps cleared themselves after reset long ago
    for (int i = 0; i < 3; i++)
      chk(clear_cycles[i] === (1 << (13 + i)), $sformatf("clear sweep %0d cycles", clear_cycles[i]));
    for (int n = 0; n < 3000; n++) begin
      c_ctrl = TW'({$urandom(), $urandom()});
      #1;
      chk(idx13 === fold(c_ctrl, 13)[12:0] && idx14 === fold(c_ctrl, 14)[13:0] && idx15 === fold(c_ctrl, 15),
          "index formula");
    end
    @(negedge clk); c_clear = 1; @(negedge clk); c_clear = 0;
    while (|c_busy) @(negedge clk);
    @(negedge clk); c_iter = 1; @(negedge clk); c_iter = 0;
    for (int v = 0; v < (1 << 15); v++) begin
      c_sample = 1; c_ctrl = TW'(v); @(negedge clk);
    end
    c_sample = 0; @(negedge clk);
    for (int i = 0; i < 3; i++) begin
      chk(tot[i] === (1 << (13 + i)), $sformatf("all %0d points of a %0d-bit index reached (%0d)",
                                                1 << (13 + i), 13 + i, tot[i]));
      chk(iter_n[i] === tot[i] && w[i] === iter_n[i], "new points counted in the iteration");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

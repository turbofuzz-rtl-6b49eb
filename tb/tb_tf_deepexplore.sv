// tb_tf_deepexplore: a small engine (4 interval slots of up to 16 words, at
// most 8 refine rounds) with three loaded intervals (lengths 5, 0, 9, 7; the
// empty one must be skipped). The words mix initialisation ADDI/ADDIW/LUI/
// SLLI with ordinary instructions. The coverage feedback is a function of the
// streamed words, so mutation changes it. The testbench predicts the whole
// schedule and checks, for three threshold settings (normal, no interval
// marked, early plateau):
//   phase A plays every non-empty interval once, unchanged, and marks those
//   whose gain reaches mark_thresh; phase B plays only marked intervals;
//   in phase B only the immediates of init ADDI/ADDIW/LUI words change
//   (registers, funct3, opcode and non-init words stay, shifts stay);
//   the best gain per interval never decreases; a round below plateau_thresh
//   or the round limit ends the stage and `stage` goes to 2.
module tb_tf_deepexplore;
  import tf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NI = 4, IL = 16, MR = 8;
  logic iv_we = 0, iv_init = 0, iv_len_we = 0, enable = 0, iter_start = 0, out_ready = 1, fb_valid = 0;
  logic [1:0] iv_sel = 0, cur_interval;
  logic [3:0] iv_idx = 0;
  logic [31:0] iv_instr = 0, mark_thresh = 0, plateau_thresh = 0, fb_gain = 0;
  logic [4:0] iv_len = 0;
  logic [2:0] n_intervals = 3'd4, n_marked;
  logic [1:0] stage;
  logic phase_refine, ready, out_valid, out_last;
  entry_t out_entry;
  tf_deepexplore #(.NUM_INTERVALS(NI), .INTERVAL_LEN(IL), .MAX_ROUNDS(MR)) dut (.clk, .rst_n,
    .iv_we, .iv_sel, .iv_idx, .iv_instr, .iv_init, .iv_len_we, .iv_len, .n_intervals, .enable,
    .mark_thresh, .plateau_thresh, .stage, .phase_refine, .ready, .iter_start, .cur_interval,
    .out_valid, .out_entry, .out_last, .out_ready, .fb_valid, .fb_gain, .n_marked);

  int lens [NI] = '{5, 0, 9, 7};
  logic [31:0] words [NI][IL];
  bit          init  [NI][IL];

  function automatic logic [31:0] rnd_word(output bit is_init);
    logic [31:0] w;
    int r;
    w = $urandom();
    r = $urandom_range(0, 5);
    is_init = r <= 3;
    case (r)
      0: w = {w[31:15], 3'b000, w[11:7], 7'h13};         // addi
      1: w = {w[31:15], 3'b000, w[11:7], 7'h1B};         // addiw
      2: w = {w[31:12], w[11:7], 7'h37};                 // lui
      3: w = {6'b0, w[25:15], 3'b001, w[11:7], 7'h13};   // slli (init, not mutated)
      4: w = {7'b0, w[24:15], 3'b000, w[11:7], 7'h33};   // add
      default: w = {w[31:15], 3'b000, w[11:7], 7'h13};   // addi, not init
    endcase
    return w;
  endfunction

  function automatic int gain_of(input logic [31:0] ws [$]);
    int g = 0;
    foreach (ws[i]) g += $countones(ws[i][31:20] & 12'hA5C);
    return g % 23;
  endfunction

  task automatic load();
    for (int k = 0; k < NI; k++) begin
      for (int i = 0; i < IL; i++) begin
        bit b;
        words[k][i] = rnd_word(b);
        init[k][i] = b;
        @(negedge clk); iv_we = 1; iv_sel = 2'(k); iv_idx = 4'(i); iv_instr = words[k][i]; iv_init = b;
      end
      @(negedge clk); iv_we = 0; iv_len_we = 1; iv_sel = 2'(k); iv_len = 5'(lens[k]);
      @(negedge clk); iv_len_we = 0;
    end
  endtask

  int n_mutated = 0;
  // Play one interval; returns its gain (already fed back).
  task automatic play(input int k, input bit refine, output int g);
    logic [31:0] got [$];
    int wd;
    wd = 0;
    while (!ready) begin @(negedge clk); wd++; if (wd > 100) break; end
    chk(ready && int'(cur_interval) === k, $sformatf("interval %0d next (got %0d)", k, cur_interval));
    chk(phase_refine === refine && stage === 2'd1, "phase and stage");
    @(negedge clk); iter_start = 1; @(negedge clk); iter_start = 0;
    wd = 0;
    forever begin
      out_ready = $urandom_range(0, 3) !== 0;
      #1;
      if (out_valid && out_ready) begin
        got.push_back(out_entry.instr);
        chk(out_entry.cls === CL_RAW && out_entry.first, "raw single-instruction blocks");
        if (out_last) begin @(negedge clk); break; end
      end
      @(negedge clk);
      if (++wd > 1000) break;
    end
    chk(got.size() === lens[k], "interval length");
    foreach (got[i]) begin
      logic [31:0] w, o;
      w = words[k][i]; o = got[i];
      if (!refine || !init[k][i] || w[6:0] === 7'h33 || (w[6:0] === 7'h13 && w[14:12] === 3'b001))
        chk(o === w, "word unchanged");
      else if (w[6:0] === 7'h37) chk(o[11:0] === w[11:0], "lui keeps rd/opcode");
      else chk(o[19:0] === w[19:0], "addi keeps registers/funct3/opcode");
      if (o !== w) n_mutated++;
    end
    g = gain_of(got);
    repeat ($urandom_range(1, 5)) @(negedge clk);
    fb_valid = 1; fb_gain = g; @(negedge clk); fb_valid = 0;
  endtask

  task automatic scenario(input int mth, input int pth, output int rounds_played, output int nmark);
    bit marked [NI];
    int g, sum;
    logic [31:0] bg [NI];
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    mark_thresh = mth; plateau_thresh = pth;
    @(negedge clk); enable = 1; @(negedge clk); enable = 0;
    nmark = 0;
    for (int k = 0; k < NI; k++) begin
      marked[k] = 0;
      if (lens[k] === 0) continue;
      play(k, 0, g);
      if (g >= mth) begin marked[k] = 1; nmark++; end
    end
    repeat (3) @(negedge clk);
    chk(int'(n_marked) === nmark, "marked count");
    rounds_played = 0;
    if (nmark > 0) begin
      for (int r = 0; r < MR; r++) begin
        sum = 0;
        for (int k = 0; k < NI; k++) begin
          if (!marked[k]) continue;
          bg[k] = dut.best_gain[k];
          play(k, 1, g);
          sum += g;
          @(negedge clk);
          chk(dut.best_gain[k] >= bg[k] && dut.best_gain[k] >= 32'(g), "best gain kept");
        end
        rounds_played++;
        if (sum < pth) break;
      end
    end
    repeat (20) @(negedge clk);
    chk(stage === 2'd2 && !ready, "stage 2 reached");
  endtask

  initial begin
    int rp, nm;
    repeat (2) @(posedge clk);
    load();
    scenario(4, 0, rp, nm);
    $display("normal: marked %0d rounds %0d mutated words %0d", nm, rp, n_mutated);
    chk(nm > 0 && rp === MR && n_mutated > 0, "refinement ran to the round limit");
    scenario(1000, 0, rp, nm);
    chk(nm === 0 && rp === 0, "nothing marked: straight to stage 2");
    scenario(0, 1000, rp, nm);
    chk(nm === 3 && rp === 1, "plateau after one round");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

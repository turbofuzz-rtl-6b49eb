// tb_tf_corpus_manager: drives random commits and selections and compares
// the manager with a reference model of the scheduling rules:
//   zero-gain generated iterations are rejected; positive ones are added
//   while there is room, then replace the lowest-gain seed if they beat it;
//   mutated iterations overwrite their parent's gain.
// Slot bookkeeping: the valid seeds and the staging slot always hold
// distinct physical slots, and an added seed takes over the former staging
// slot. Selection returns the best seed about 3/4 of the time (checked as a
// proportion over 4000 draws) and otherwise a valid seed.
module tb_tf_corpus_manager;
  import tf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NS = 16;
  logic sel_req = 0, sel_ack, sel_prio, commit = 0, act_valid;
  logic [3:0] sel_seed, commit_parent = 0;
  logic [4:0] sel_slot, staging, count;
  logic [BLK_W:0] sel_len, commit_len = 0;
  mode_e commit_mode = M_DIRECT;
  logic [31:0] commit_gain = 0;
  logic [1:0] act;
  tf_corpus_manager #(.NUM_SEEDS(NS)) dut (.clk, .rst_n, .sel_prio_prob(5'd12), .sel_req, .sel_ack,
    .sel_seed, .sel_slot, .sel_len, .sel_prio, .staging, .commit, .commit_mode, .commit_parent,
    .commit_gain, .commit_len, .act_valid, .act, .count);

  int m_count = 0;
  int unsigned m_gain [NS];
  int m_len [NS];
  int m_slot [NS];
  int n_act [4];

  task automatic do_commit(input mode_e md, input int parent, input int unsigned g, input int l);
    int exp_act, victim;
    int old_staging;
    old_staging = int'(staging);
    @(negedge clk);
    commit = 1; commit_mode = md; commit_parent = 4'(parent); commit_gain = g; commit_len = (BLK_W+1)'(l);
    @(negedge clk); commit = 0;
    #1;
    victim = -1;
    if (md === M_MUTATE) begin exp_act = 3; m_gain[parent] = g; end
    else if (g === 0) exp_act = 0;
    else if (m_count < NS) begin exp_act = 1; victim = m_count; m_count++; end
    else begin
      victim = 0;
      for (int i = 1; i < NS; i++) if (m_gain[i] < m_gain[victim]) victim = i;
      if (g > m_gain[victim]) exp_act = 2; else begin exp_act = 0; victim = -1; end
    end
    if (victim >= 0) begin m_gain[victim] = g; m_len[victim] = l; m_slot[victim] = old_staging; end
    chk(act_valid && int'(act) === exp_act, $sformatf("act %0d expected %0d", act, exp_act));
    chk(int'(count) === m_count, "count");
    n_act[exp_act]++;
    begin
      bit used [int];
      used[int'(staging)] = 1;
      for (int i = 0; i < m_count; i++) begin
        chk(!used.exists(int'(dut.phys[i])), "distinct slots");
        used[int'(dut.phys[i])] = 1;
        if (m_slot[i] >= 0) chk(int'(dut.phys[i]) === m_slot[i], "seed keeps its slot");
      end
    end
  endtask

  int n_sel = 0, n_best = 0;
  task automatic do_select();
    int best;
    @(negedge clk); sel_req = 1; @(negedge clk); sel_req = 0;
    #1;
    chk(sel_ack, "ack after one cycle");
    best = 0;
    for (int i = 1; i < m_count; i++) if (m_gain[i] > m_gain[best]) best = i;
    chk(int'(sel_seed) < m_count, "valid seed selected");
    chk(int'(sel_slot) === int'(dut.phys[sel_seed]) && int'(sel_len) === m_len[sel_seed], "slot and length");
    if (sel_prio) chk(int'(sel_seed) === best, "priority pick is the best seed");
    n_sel++;
    if (sel_prio) n_best++;
  endtask

  initial begin
    foreach (m_slot[i]) m_slot[i] = -1;
    repeat (2) @(posedge clk); rst_n = 1;
    do_commit(M_DIRECT, 0, 0, 10);                    // reject on an empty corpus
    for (int n = 0; n < 3000; n++) begin
      int r;
      r = $urandom_range(0, 9);
      if (r < 3 && m_count > 0) do_commit(M_MUTATE, $urandom_range(0, m_count - 1), $urandom_range(0, 60), 0);
      else if (r < 7) do_commit($urandom_range(0, 1) ? M_DEEP : M_DIRECT,
                                0, $urandom_range(0, 3) === 0 ? 0 : $urandom_range(1, 100),
                                $urandom_range(1, 4000));
      else if (m_count > 0) do_select();
    end
    for (int n = 0; n < 4000; n++) do_select();
    $display("reject %0d add %0d replace %0d update %0d; best picked %0d/%0d",
             n_act[0], n_act[1], n_act[2], n_act[3], n_best, n_sel);
    chk(n_act[0] > 0 && n_act[1] === NS && n_act[2] > 0 && n_act[3] > 0, "all outcomes seen");
    chk(n_best * 100 > n_sel * 70 && n_best * 100 < n_sel * 80, "priority share near 3/4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

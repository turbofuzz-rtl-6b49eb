// tb_tf_cov_instrument: three instances.
//   A: defaults (four registers 8+6+5+7 bits, 15-bit index). Random control
//      values, with repeats; the index is checked against the closed form
//      "flat bit k goes to index bit k mod MAX_STATE" (which is what the
//      rolled-back sequential offsets amount to), and the new-point counters
//      against a reference bitmap. busy lasts 2^15 cycles after reset.
//   B: registers 3+2+1+1 bits into a 6-bit index, SHIFT = 2. All 128 control
//      values are applied: every one of the 64 points must be reached (no
//      unreachable padded bits), and the weighted count is 4x.
//   C: same with SHIFT = -1: weighted count is half. Then `clear` empties the
//      map and the same points count as new again.
module tb_tf_cov_instrument;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic a_clear = 0, a_iter = 0, a_sample = 0, a_busy;
  logic [25:0] a_ctrl = '0;
  logic [14:0] a_index;
  logic [31:0] a_iter_n, a_w, a_tot;
  tf_cov_instrument u_a (.clk, .rst_n, .clear(a_clear), .iter_start(a_iter), .sample(a_sample),
    .ctrl(a_ctrl), .busy(a_busy), .index(a_index), .n_cov_iter(a_iter_n), .n_cov_weighted(a_w),
    .n_cov_total(a_tot));

  logic b_clear = 0, b_iter = 0, b_sample = 0, b_busy, c_busy;
  logic [6:0] b_ctrl = '0;
  logic [5:0] b_index, c_index;
  logic [31:0] b_iter_n, b_w, b_tot, c_iter_n, c_w, c_tot;
  tf_cov_instrument #(.REG_W('{3, 2, 1, 1}), .MAX_STATE(6), .SHIFT(2)) u_b (.clk, .rst_n,
    .clear(b_clear), .iter_start(b_iter), .sample(b_sample), .ctrl(b_ctrl), .busy(b_busy),
    .index(b_index), .n_cov_iter(b_iter_n), .n_cov_weighted(b_w), .n_cov_total(b_tot));
  tf_cov_instrument #(.REG_W('{3, 2, 1, 1}), .MAX_STATE(6), .SHIFT(-1)) u_c (.clk, .rst_n,
    .clear(b_clear), .iter_start(b_iter), .sample(b_sample), .ctrl(b_ctrl), .busy(c_busy),
    .index(c_index), .n_cov_iter(c_iter_n), .n_cov_weighted(c_w), .n_cov_total(c_tot));

  function automatic logic [14:0] ref_idx(input logic [25:0] c);
    logic [14:0] r = '0;
    for (int k = 0; k < 26; k++) r[k % 15] ^= c[k];
    return r;
  endfunction

  bit seen [int];
  int m_iter = 0, m_tot = 0;
  logic [25:0] pool [64];

  initial begin
    int busy_cycles;
    foreach (pool[i]) pool[i] = 26'($urandom());
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    busy_cycles = 0;
    while (a_busy) begin @(negedge clk); busy_cycles++; end
    chk(busy_cycles === 32768, $sformatf("clear sweep %0d cycles", busy_cycles));
    for (int n = 0; n < 20000; n++) begin
      a_iter = (n % 997 === 0);
      a_sample = $urandom_range(0, 3) !== 0;
      a_ctrl = $urandom_range(0, 1) ? pool[$urandom_range(0, 63)] : 26'($urandom());
      #1;
      chk(a_index === ref_idx(a_ctrl), "index formula");
      if (a_iter) m_iter = 0;
      if (a_sample && !seen.exists(int'(a_index))) begin
        seen[int'(a_index)] = 1; m_tot++;
        if (!a_iter) m_iter++;
      end
      @(negedge clk);
      chk(int'(a_iter_n) === m_iter && int'(a_tot) === m_tot && a_w === a_iter_n, "A counters");
    end
    a_sample = 0; a_iter = 0;
    // B and C finished clearing long ago (64 cycles).
    chk(!b_busy && !c_busy, "small maps cleared");
    @(negedge clk); b_iter = 1; @(negedge clk); b_iter = 0;
    for (int v = 0; v < 128; v++) begin b_sample = 1; b_ctrl = 7'(v); @(negedge clk); end
    b_sample = 0; @(negedge clk);
    chk(b_tot === 64 && b_iter_n === 64, $sformatf("all 64 points reachable (%0d)", b_tot));
    chk(b_w === 256, "SHIFT 2 weights x4");
    chk(c_w === 32, "SHIFT -1 halves");
    @(negedge clk); b_clear = 1; @(negedge clk); b_clear = 0;
    chk(b_busy && b_tot === 0, "clear restarts the sweep");
    repeat (70) @(negedge clk);
    chk(!b_busy, "sweep done");
    b_ctrl = 7'h55; b_sample = 1; @(negedge clk); b_sample = 0;
    chk(b_tot === 1, "point new again after clear");
    $display("A: %0d points", m_tot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

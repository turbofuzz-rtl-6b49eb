// tb_tf_diff_checker: the reference side sends a stream of 3000 random commit
// records; the processor side sends the same stream with 12 records
// corrupted (pc, instruction, rd or write data). Both sides offer records
// with random gaps, including long stalls of one side.
// Checked: each corrupted pair pauses the checker with a single snap_trig
// pulse and is held in mm_dut/mm_ref exactly; no comparison happens while
// paused; after a random delay `resume` continues and the final counts are
// 2988 matches and 12 mismatches; the two sides never drift more than the
// FIFO depth (16) apart, and a stalled side makes the other side's ready drop.
module tb_tf_diff_checker;
  import tf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int N = 3000, NBAD = 12;
  logic dut_valid = 0, ref_valid = 0, dut_ready, ref_ready, resume = 0, paused, snap_trig;
  commit_t dut_rec = '0, ref_rec = '0, mm_dut, mm_ref;
  logic [31:0] n_checked, n_mismatch;
  tf_diff_checker dut (.clk, .rst_n, .dut_valid, .dut_rec, .dut_ready, .ref_valid, .ref_rec,
    .ref_ready, .resume, .paused, .snap_trig, .mm_dut, .mm_ref, .n_checked, .n_mismatch);

  commit_t ref_s [N], dut_s [N];
  bit bad [int];
  int di = 0, ri = 0, n_snap = 0, n_ready_low = 0, bad_seen = 0;
  bit d_stall = 0, r_stall = 0;

  initial begin
    for (int i = 0; i < N; i++) begin
      ref_s[i] = '{pc: {32'h0, 32'h8000_0000 + 32'(4 * i)}, instr: $urandom(), rd: 5'($urandom()),
                   wdata: {$urandom(), $urandom()}};
      dut_s[i] = ref_s[i];
    end
    while (bad.size() < NBAD) begin
      int k, f;
      k = $urandom_range(5, N - 5);
      if (bad.exists(k)) continue;
      bad[k] = 1;
      f = $urandom_range(0, 3);
      case (f)
        0: dut_s[k].pc ^= 64'h4;
        1: dut_s[k].instr ^= 32'(1) << $urandom_range(0, 31);
        2: dut_s[k].rd ^= 5'(1) << $urandom_range(0, 4);
        default: dut_s[k].wdata ^= 64'(1) << $urandom_range(0, 63);
      endcase
    end
  end

  // Producers: offer at negedge, transfer on posedge when ready.
  always @(negedge clk) if (rst_n) begin
    if ($urandom_range(0, 199) === 0) d_stall = !d_stall;
    if ($urandom_range(0, 199) === 0) r_stall = !r_stall;
    dut_valid = (di < N) && !d_stall && ($urandom_range(0, 3) !== 0);
    ref_valid = (ri < N) && !r_stall && ($urandom_range(0, 2) !== 0);
    if (dut_valid) dut_rec = dut_s[di];
    if (ref_valid) ref_rec = ref_s[ri];
  end
  always @(posedge clk) if (rst_n) begin
    if (dut_valid && dut_ready) di++;
    if (ref_valid && ref_ready) ri++;
    if (!dut_ready || !ref_ready) n_ready_low++;
    chk(di - ri <= 16 && ri - di <= 16, "sides within FIFO depth");
  end

  // Mismatch handling: check the held pair, wait, resume.
  int cmp_idx = 0;
  always @(posedge clk) if (rst_n) begin
    if (snap_trig) begin
      int k;
      n_snap++;
      k = int'((mm_ref.pc[31:0] - 32'h8000_0000) >> 2);
      chk(bad.exists(k), $sformatf("mismatch at a corrupted record (%0d)", k));
      chk(mm_ref === ref_s[k] && mm_dut === dut_s[k], "offending pair held");
      chk(paused, "paused with the snapshot trigger");
      chk(int'(n_checked) + int'(n_mismatch) - 1 === k, "stream order");
    end
  end
  initial begin
    forever begin
      @(negedge clk);
      if (paused && !resume) begin
        logic [31:0] c0;
        c0 = n_checked;
        repeat ($urandom_range(1, 30)) begin
          @(negedge clk);
          chk(!snap_trig && paused && n_checked === c0, "stays paused, one trigger");
        end
        resume = 1; @(negedge clk); resume = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    while (int'(n_checked) + int'(n_mismatch) < N) @(negedge clk);
    repeat (5) @(negedge clk);
    $display("checked %0d mismatches %0d snapshots %0d ready-low cycles %0d",
             n_checked, n_mismatch, n_snap, n_ready_low);
    chk(n_checked === N - NBAD && n_mismatch === NBAD && n_snap === NBAD, "final counts");
    chk(n_ready_low > 0, "backpressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

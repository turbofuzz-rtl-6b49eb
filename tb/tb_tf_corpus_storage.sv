// tb_tf_corpus_storage: random writes and reads against a reference array,
// with a small geometry (4 seeds of 64 entries, 5 slots). Read data must
// appear one cycle after rd_en and hold while rd_en is low; a write and a read
// of the same address in one cycle return the old contents.
module tb_tf_corpus_storage;
  import tf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam int NS = 4, LEN = 64;
  logic we = 0, rd_en = 0;
  logic [2:0] wr_slot = 0, rd_slot = 0;
  logic [5:0] wr_idx = 0, rd_idx = 0;
  entry_t wr_data = '0, rd_data;
  tf_corpus_storage #(.NUM_SEEDS(NS), .SEED_LEN(LEN)) dut (.clk, .we, .wr_slot, .wr_idx, .wr_data,
    .rd_en, .rd_slot, .rd_idx, .rd_data);

  entry_t ref_mem [(NS + 1) * LEN];
  entry_t expect_q;
  bit     have_exp = 0;

  function automatic entry_t rnd_entry();
    entry_t e;
    e = '0;
    e.instr = $urandom(); e.aux = $urandom(); e.blk = 12'($urandom());
    e.first = 1'($urandom()); e.is_cf = 1'($urandom());
    return e;
  endfunction

  initial begin
    // Fill everything first so every read is defined.
    for (int s = 0; s <= NS; s++)
      for (int i = 0; i < LEN; i++) begin
        @(negedge clk);
        we = 1; wr_slot = 3'(s); wr_idx = 6'(i); wr_data = rnd_entry();
        ref_mem[s * LEN + i] = wr_data;
      end
    @(negedge clk); we = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (have_exp) chk(rd_data === expect_q, $sformatf("read data at step %0d", n));
      we = 1'($urandom()); rd_en = 1'($urandom());
      wr_slot = 3'($urandom_range(0, NS)); wr_idx = 6'($urandom());
      rd_slot = 3'($urandom_range(0, NS)); rd_idx = 6'($urandom());
      if (n % 7 === 0) begin rd_slot = wr_slot; rd_idx = wr_idx; end
      wr_data = rnd_entry();
      if (rd_en) begin expect_q = ref_mem[int'(rd_slot) * LEN + int'(rd_idx)]; have_exp = 1; end
      if (we) ref_mem[int'(wr_slot) * LEN + int'(wr_idx)] = wr_data;
    end
    @(negedge clk); chk(rd_data === expect_q, "last read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

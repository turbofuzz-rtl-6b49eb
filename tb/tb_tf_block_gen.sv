// tb_tf_block_gen: generates many blocks and checks each one: the block is
// emitted on consecutive cycles right after start, its length is one plus
// the affiliated count the prime's opcode requires, affiliated AUIPC/ADDI
// come first, `first`/`last` mark the ends, memory targets lie in their
// regions (stores in data only) and control-flow targets are 1..4 blocks
// ahead. With only the A subset every block is AUIPC, ADDI, AMO.
module tb_tf_block_gen;
  import tf_pkg::*;
  import tb_rv_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [NUM_CAT-1:0] cat_en = '1;
  logic [4:0] mem_data_prob = 5'd12;
  logic [BLK_W-1:0] cur_blk = '0;
  logic busy, out_valid, out_last;
  entry_t out_entry;
  int checks = 0, failures = 0;

  tf_block_gen dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s instr=%h", msg, out_entry.instr); end
  endtask

  entry_t blk [$];
  int ncf = 0, nmem = 0;
  task automatic one_block(input logic [BLK_W-1:0] cb);
    int n;
    cur_blk = cb;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    blk.delete();
    n = 0;
    while (1) begin
      chk(out_valid, "contiguous block");
      if (!out_valid) return;
      blk.push_back(out_entry);
      n++;
      if (out_last) break;
      @(negedge clk);
      if (n > 4) begin chk(0, "block too long"); return; end
    end
    begin
      entry_t p;
      p = blk[blk.size()-1];
      chk(blk.size() === 1 + n_aff_of(p.instr), "block length");
      chk(blk[0].first, "first flag");
      for (int i = 1; i < blk.size(); i++) chk(!blk[i].first, "only one first");
      if (blk.size() > 1) chk(blk[0].instr === 32'h17 && blk[0].role === R_AUIPC, "auipc first");
      if (blk.size() > 2) chk(blk[1].instr === 32'h13 && blk[1].role === R_ADDI, "addi second");
      chk(p.role === R_PRIME, "prime last");
      if (is_cf(p.instr)) begin
        ncf++;
        chk(p.is_cf && p.aux > 32'(cb) && p.aux <= 32'(cb) + 4, "jump 1..4 blocks ahead");
      end else chk(!p.is_cf, "not cf");
      if (n_aff_of(p.instr) > 0 && !is_cf(p.instr)) begin
        nmem++;
        if (is_store(p.instr)) chk(p.aux >= 32'h8010_0000 && p.aux < 32'h8011_0000, "store target in data");
        else chk(p.aux >= 32'h8000_0000 && p.aux < 32'h8011_0000, "load target in a region");
      end
      for (int i = 0; i < blk.size(); i++) chk(blk[i].aux === p.aux, "aux shared by block");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 400; i++) one_block(BLK_W'(i));
    chk(ncf > 10 && nmem > 10, "control flow and memory blocks seen");
    cat_en = 5'b01000;
    for (int i = 0; i < 20; i++) begin
      one_block(BLK_W'(i));
      chk(blk.size() === 3 && blk[2].instr[6:0] === 7'h2F, "A only: auipc, addi, amo");
    end
    @(negedge clk);
    chk(!busy, "idle after block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

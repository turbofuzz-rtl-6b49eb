// tb_tf_global_context: appends a known sequence of blocks and checks the
// stamped block indices, the block base address table (CODE_BASE + 4 *
// position of the block's first entry), the instruction and block counts,
// the code end, remap writes and lookups, overflow at DEPTH and clear.
module tb_tf_global_context;
  import tf_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0, clear = 0, app_valid = 0, remap_we = 0, rd_en = 0;
  entry_t app_entry = '0, rd_entry;
  logic [BLK_W-1:0] remap_old = '0, remap_new = '0, rd_addr = '0;
  logic [BLK_W-1:0] base_idx0 = '0, base_idx1 = '0, remap_idx = '0, remap_blk;
  logic [31:0] base_addr0, base_addr1, code_end;
  logic remap_hit, overflow;
  logic [BLK_W:0] instr_cnt, blk_cnt;
  int checks = 0, failures = 0;

  tf_global_context #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  int blen [$];
  int pos, exp_blk [DEPTH], exp_base [DEPTH];
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // blocks of length 1..3
    pos = 0;
    for (int b = 0; b < 20; b++) begin
      int l; l = 1 + (b * 7) % 3;
      exp_base[b] = 32'h8000_0000 + 4 * pos;
      for (int i = 0; i < l; i++) begin
        @(negedge clk);
        app_valid = 1;
        app_entry = '0;
        app_entry.first = (i === 0);
        app_entry.instr = 32'(pos) * 32'h01010101;
        exp_blk[pos] = b;
        pos++;
      end
    end
    @(negedge clk); app_valid = 0;
    chk(int'(instr_cnt) === pos, "instruction count");
    chk(int'(blk_cnt) === 20, "block count");
    chk(code_end === 32'h8000_0000 + 4 * pos, "code end");
    for (int b = 0; b < 20; b++) begin
      base_idx0 = BLK_W'(b); base_idx1 = BLK_W'(19 - b); #1;
      chk(base_addr0 === exp_base[b] && base_addr1 === exp_base[19 - b], "base address table");
    end
    for (int p = 0; p < pos; p++) begin
      @(negedge clk); rd_en = 1; rd_addr = BLK_W'(p);
      @(negedge clk); rd_en = 0;
      chk(rd_entry.instr === 32'(p) * 32'h01010101 && int'(rd_entry.blk) === exp_blk[p], "entry and block index");
    end
    // remap
    @(negedge clk); remap_we = 1; remap_old = 12'd7; remap_new = 12'd3;
    @(negedge clk); remap_we = 0;
    remap_idx = 12'd7; #1; chk(remap_hit && remap_blk === 12'd3, "remap hit");
    remap_idx = 12'd8; #1; chk(!remap_hit, "remap miss");
    // overflow
    @(negedge clk); app_valid = 1; app_entry.first = 1;
    repeat (DEPTH) @(negedge clk);
    app_valid = 0;
    chk(overflow && int'(instr_cnt) === DEPTH, "overflow at depth");
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    remap_idx = 12'd7; #1;
    chk(instr_cnt === 0 && blk_cnt === 0 && !overflow && !remap_hit, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

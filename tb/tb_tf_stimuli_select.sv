// tb_tf_stimuli_select: random traffic on both sources with random sel_deep
// per iteration and random consumer stalls. Checked every cycle against a
// model: the output carries the selected source's entry, only the selected
// source sees out_ready, positions count accepted instructions from 0 after
// iter_start, the address is CODE_BASE + 4*position, and the per-source
// counters match.
module tb_tf_stimuli_select;
  import tf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic iter_start = 0, sel_deep = 0, fz_valid = 0, de_valid = 0, out_ready = 0;
  logic fz_ready, de_ready, out_valid;
  entry_t fz_entry = '0, de_entry = '0, out_entry;
  logic [BLK_W-1:0] out_pos;
  logic [31:0] out_addr, n_fuzz, n_deep;
  logic [BLK_W:0] iter_count;
  tf_stimuli_select dut (.clk, .rst_n, .iter_start, .sel_deep, .fz_valid, .fz_entry, .fz_ready,
    .de_valid, .de_entry, .de_ready, .out_valid, .out_entry, .out_pos, .out_addr, .out_ready,
    .iter_count, .n_fuzz, .n_deep);

  int pos = 0, mf = 0, md = 0;
  initial begin
    repeat (2) @(posedge clk); @(negedge clk); rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      sel_deep = 1'($urandom()); fz_valid = 0; de_valid = 0;
      iter_start = 1; @(negedge clk); iter_start = 0; pos = 0;
      repeat ($urandom_range(10, 200)) begin
        fz_valid = 1'($urandom()); de_valid = 1'($urandom()); out_ready = $urandom_range(0, 3) !== 0;
        fz_entry.instr = $urandom(); de_entry.instr = $urandom();
        fz_entry.aux = 32'(it); de_entry.aux = ~32'(it);
        #1;
        chk(out_valid === (sel_deep ? de_valid : fz_valid), "valid from selected source");
        chk(out_entry === (sel_deep ? de_entry : fz_entry), "entry from selected source");
        chk(fz_ready === (!sel_deep && out_ready) && de_ready === (sel_deep && out_ready), "ready routing");
        chk(int'(out_pos) === pos && out_addr === 32'h8000_0000 + 32'(4 * pos), "position and address");
        if (out_valid && out_ready) begin pos++; if (sel_deep) md++; else mf++; end
        @(negedge clk);
        chk(int'(iter_count) === pos && int'(n_fuzz) === mf && int'(n_deep) === md, $sformatf("counters %0d/%0d %0d/%0d %0d/%0d", iter_count, pos, n_fuzz, mf, n_deep, md));
      end
    end
    chk(mf > 0 && md > 0, "both sources used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

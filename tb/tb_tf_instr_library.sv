// tb_tf_instr_library: checks every library index under every subset mask:
// the returned instruction belongs to an enabled subset (judged from its
// encoding), its operand class and affiliated-instruction count match the
// opcode, a disabled entry falls through to the next enabled one, and an
// empty mask gives ADDI. With all subsets on, the 172 templates must be
// distinct, and indexes past the table wrap to its start.
module tb_tf_instr_library;
  import tf_pkg::*;
  import tb_rv_pkg::*;
  logic [LIB_IW-1:0] idx;
  logic [NUM_CAT-1:0] cat_en;
  logic [31:0] tmpl;
  iclass_e cls;
  logic [2:0] cat;
  logic [1:0] n_aff;
  logic [LIB_IW-1:0] sel_idx;
  int checks = 0, failures = 0;

  tf_instr_library dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s idx=%0d en=%b tmpl=%h", msg, idx, cat_en, tmpl); end
  endtask

  // Subset of an instruction judged from its encoding alone.
  function automatic int subset_of(input logic [31:0] x);
    case (x[6:0])
      7'h33, 7'h3B: return (x[31:25] === 7'h01) ? 1 : 0;
      7'h53, 7'h07, 7'h27, 7'h43, 7'h47, 7'h4B, 7'h4F: return 2;
      7'h2F: return 3;
      7'h73: return 4;
      default: return 0;
    endcase
  endfunction

  // Operand class of an instruction judged from its encoding alone.
  function automatic iclass_e class_of(input logic [31:0] x);
    case (x[6:0])
      7'h33, 7'h3B: return CL_R;
      7'h13, 7'h1B: return (x[13:12] === 2'b01) ? CL_SHIFT : CL_I;
      7'h37, 7'h17: return CL_U;
      7'h03, 7'h07: return CL_LOAD;
      7'h23, 7'h27: return CL_STORE;
      7'h63: return CL_BRANCH;
      7'h6F: return CL_JAL;
      7'h67: return CL_JALR;
      7'h2F: return CL_AMO;
      7'h73: return CL_CSR;
      7'h0F: return CL_RAW;
      7'h43, 7'h47, 7'h4B, 7'h4F: return CL_R4;
      7'h53: return (x[31:27] inside {5'b01011, 5'b11000, 5'b11010, 5'b11100, 5'b11110, 5'b01000})
                    ? CL_R1 : CL_R;
      default: return CL_RAW;
    endcase
  endfunction

  int seen [NUM_CAT];
  bit tmpls [logic [31:0]];
  initial begin
    for (int m = 1; m < 32; m++) begin
      cat_en = NUM_CAT'(m);
      for (int i = 0; i < LIB_N; i++) begin
        idx = LIB_IW'(i);
        #1;
        chk(cat_en[subset_of(tmpl)], "subset enabled");
        chk(int'(n_aff) === n_aff_of(tmpl), "affiliated count");
        chk(int'(cat) === subset_of(tmpl), "category report");
        chk(cls === class_of(tmpl), "operand class");
        chk(tmpl[11:7] === 0 && tmpl[19:15] === 0, "register fields empty");
        if (m === 31) begin
          chk(sel_idx === idx, "all enabled: no skip");
          seen[subset_of(tmpl)]++;
          tmpls[tmpl] = 1;
        end
      end
    end
    for (int c = 0; c < NUM_CAT; c++) chk(seen[c] > 0, "every subset present");
    chk(tmpls.num() === LIB_N, "templates distinct");
    chk(seen[0] === 51 && seen[1] === 13 && seen[2] === 62 && seen[3] === 22 && seen[4] === 24,
        "subset sizes");
    // only A enabled: index 0 falls through to the first A entry, lr.w
    cat_en = 5'b01000; idx = '0; #1;
    chk(int'(sel_idx) === 64 && tmpl === 32'h1000_202F && n_aff === 2'd2, "fall through to lr.w");
    // only M enabled: an index in the Zicsr range wraps around to mul
    cat_en = 5'b00010; idx = LIB_IW'(150); #1;
    chk(int'(sel_idx) === 51 && tmpl === 32'h0200_0033, "wrap around to mul");
    // indexes past the table wrap to its start
    cat_en = '1;
    for (int i = LIB_N; i < 256; i++) begin
      idx = LIB_IW'(i); #1;
      chk(int'(sel_idx) === i - LIB_N, "index past the table wraps");
    end
    cat_en = '0; idx = LIB_IW'(20); #1;
    chk(tmpl === 32'h0000_0013 && cls === CL_I, "empty mask gives addi");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

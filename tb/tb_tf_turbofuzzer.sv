// tb_tf_turbofuzzer: runs the fuzzer IP for many short iterations
// (iter_len 200) with a randomly stalling consumer. The testbench keeps the
// previous iteration as the only seed (a one-seed corpus with a registered
// read port) so mutation mode can start from the second iteration.
// Every iteration is decoded with the ISA helpers and checked:
//   length within iter_len and no more than one block short of it;
//   every opcode legal; every branch / JAL / AUIPC+JALR target is a block
//   start, the code end or the +4 repair; every AUIPC+load address is in the
//   code or the data region; every store / AMO address is in the data region
//   and aligned to 8 bytes; the address register of a memory or JALR prime
//   is the register set up by its AUIPC.
// Both modes and all three mutation operations must occur.
module tb_tf_turbofuzzer;
  import tf_pkg::*;
  import tb_rv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #200000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  localparam logic [31:0] CB = 32'h8000_0000, DB = 32'h8010_0000;
  localparam int ITER = 200;

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

  int n_mode [3], n_op [3];
  always @(posedge clk) if (rst_n && op_valid) n_op[int'(op)]++;

  function automatic bit in_data(input logic [31:0] a);
    return a >= DB && a < DB + 32'h1_0000;
  endfunction

  task automatic check_iter();
    int n;
    bit starts [int];
    logic [31:0] pc, t, code_end;
    n = cur.size();
    chk(n <= ITER && n >= ITER - 5, $sformatf("iteration length %0d", n));
    chk(n === int'(iter_instrs), "length matches instr count");
    code_end = CB + 32'(4 * n);
    foreach (cur[p]) if (cur[p].first) starts[p] = 1;
    chk(starts.exists(0), "first entry opens a block");
    foreach (cur[p]) begin
      logic [31:0] w;
      w = cur[p].instr;
      pc = CB + 32'(4 * p);
      chk(w[1:0] === 2'b11 && w[6:0] inside {7'h03, 7'h07, 7'h0F, 7'h13, 7'h17, 7'h1B, 7'h23, 7'h27,
          7'h2F, 7'h33, 7'h37, 7'h3B, 7'h43, 7'h47, 7'h4B, 7'h4F, 7'h53, 7'h63, 7'h67, 7'h6F, 7'h73},
          $sformatf("legal opcode %h", w));
      if (w[6:0] === 7'h2F && w[31:27] === 5'b00010) chk(w[24:20] === 5'd0, "lr has rs2 = x0");
      if (w[6:0] === 7'h1B && w[13:12] === 2'b01) chk(w[25] === 1'b0, "32-bit shift amount below 32");
      if (cur[p].role !== R_PRIME) continue;
      case (w[6:0])
        7'h63, 7'h6F: begin
          t = pc + (w[6:0] === 7'h63 ? imm_b(w) : imm_j(w));
          chk(t === code_end || t === pc + 4 || (t >= CB && t < code_end && starts.exists(int'((t - CB) >> 2))),
              $sformatf("cf target %h at %0d", t, p));
        end
        7'h67, 7'h03, 7'h07, 7'h23, 7'h27, 7'h2F: begin
          int ap; logic [31:0] au;
          ap = (w[6:0] === 7'h2F) ? p - 2 : p - 1;
          au = cur[ap].instr;
          chk(ap >= 0 && au[6:0] === 7'h17 && cur[ap].role === R_AUIPC, "prime preceded by its auipc");
          t = CB + 32'(4 * ap) + imm_u(au) + (w[6:0] === 7'h2F ? imm_i(cur[p-1].instr)
                                             : w[6:0] inside {7'h23, 7'h27} ? imm_s(w) : imm_i(w));
          chk(w[19:15] === au[11:7] && au[11:7] !== 0, "address register from auipc");
          if (w[6:0] === 7'h67)
            chk(t === code_end || (t < code_end && t >= CB && starts.exists(int'((t - CB) >> 2))), "jalr target");
          else if (w[6:0] inside {7'h03, 7'h07})
            chk(in_data(t) || (t >= CB && t < CB + 32'h4000), $sformatf("load address %h", t));
          else
            chk(in_data(t) && t[2:0] === 0, $sformatf("store address %h", t));
        end
        default: ;
      endcase
    end
  endtask

  initial begin
    cfg = CFG_DEFAULT;
    cfg.iter_len = 13'(ITER);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 40; it++) begin
      cur.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin
        out_ready = $urandom_range(0, 3) !== 0;
        #1;
        if (out_valid && out_ready) cur.push_back(out_entry);
        @(negedge clk);
      end
      n_mode[int'(mode)]++;
      check_iter();
      chk(!overflow, "no overflow");
      // Store the result as the next seed (block indices restart per iteration).
      foreach (cur[p]) seed[p] = cur[p];
      seed_len = (BLK_W+1)'(cur.size());
      corpus_nonempty = 1;
    end
    $display("direct %0d mutate %0d  gen %0d del %0d ret %0d  fixes %0d",
             n_mode[M_DIRECT], n_mode[M_MUTATE], n_op[OP_GEN], n_op[OP_DEL], n_op[OP_RET], n_fix);
    chk(n_mode[M_DIRECT] > 0 && n_mode[M_MUTATE] > 0, "both modes used");
    chk(n_op[OP_GEN] > 0 && n_op[OP_DEL] > 0 && n_op[OP_RET] > 0, "all mutation operations used");
    chk(n_op[OP_DEL] > n_op[OP_GEN] && n_op[OP_GEN] > n_op[OP_RET], "default weights 11/16 > 3/16 > 2/16");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

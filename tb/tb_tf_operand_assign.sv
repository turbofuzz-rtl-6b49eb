// tb_tf_operand_assign: fills the global context with hand-made blocks and
// decodes what operand assignment emits, using encoding helpers written from
// the ISA tables:
//   AUIPC+load and AUIPC+ADDI+AMO reach exactly their target address
//   (a store target in the code region is folded into the data region);
//   fresh branches/JAL land on their target block, or on the code end when
//   the block index is past the last block; a retained branch keeps its
//   registers and lands on the remapped block, or on some block when its
//   target was deleted; retained non-address and raw instructions are
//   unchanged; an address whose low 12 bits are negative is still reached;
//   a one-source FP op keeps its type field, a fused multiply-add keeps its
//   format and gets a varying third source, a 32-bit shift gets a 5-bit
//   amount, LR gets rs2 = x0;
//   a branch more than 4 KiB away is repaired to +4; `n_fix`
//   counts the two repairs. With out_ready held high the pipeline delivers
//   one entry per cycle; further passes with a randomly stalling consumer
//   give the same structure.
module tb_tf_operand_assign;
  import tf_pkg::*;
  import tb_rv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic clear = 0, app_valid = 0, remap_we = 0;
  entry_t app_entry = '0;
  logic [BLK_W-1:0] remap_old = '0, remap_new = '0;
  logic gc_rd_en, remap_hit, ovf;
  logic [BLK_W-1:0] gc_rd_addr, base_idx0, base_idx1, remap_idx, remap_blk;
  entry_t gc_rd_entry, out_entry;
  logic [31:0] base_addr0, base_addr1, code_end, n_fix;
  logic [BLK_W:0] instr_cnt, blk_cnt;
  logic start = 0, out_valid, out_ready = 1, busy, done;

  tf_global_context u_gc (.clk, .rst_n, .clear, .app_valid, .app_entry, .remap_we, .remap_old,
    .remap_new, .rd_en(gc_rd_en), .rd_addr(gc_rd_addr), .rd_entry(gc_rd_entry), .base_idx0,
    .base_addr0, .base_idx1, .base_addr1, .remap_idx, .remap_hit, .remap_blk, .instr_cnt,
    .blk_cnt, .code_end, .overflow(ovf));
  tf_operand_assign dut (.clk, .rst_n, .start, .n_entries(instr_cnt), .n_blk(blk_cnt), .code_end,
    .gc_rd_en, .gc_rd_addr, .gc_rd_entry, .base_idx0, .base_addr0, .base_idx1, .base_addr1,
    .remap_idx, .remap_hit, .remap_blk, .out_valid, .out_entry, .out_ready, .busy, .done, .n_fix);

  localparam logic [31:0] CB = 32'h8000_0000;
  function automatic logic [31:0] pc(input int p); return CB + 32'(4 * p); endfunction

  task automatic app(input logic [31:0] instr, input iclass_e c, input role_e r, input bit first,
                     input bit cf, input logic [31:0] aux, input bit tseed, input bit ret);
    @(negedge clk);
    app_valid = 1;
    app_entry = '{instr: instr, cls: c, role: r, first: first, is_cf: cf, blk: '0, aux: aux,
                  tgt_seed: tseed, retained: ret};
    @(negedge clk);
    app_valid = 0;
  endtask

  int nblk, far_pos;
  int blkpos [$];   // position of each block's first entry
  task automatic fill();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    app(32'h33, CL_R, R_PRIME, 1, 0, 0, 0, 0);                            // b0 p0 add
    app(32'h17, CL_LOAD, R_AUIPC, 1, 0, 32'h8010_0100, 0, 0);             // b1 p1
    app(32'h3003, CL_LOAD, R_PRIME, 0, 0, 32'h8010_0100, 0, 0);           // p2 ld
    app(32'h17, CL_AMO, R_AUIPC, 1, 0, 32'h8000_0010, 0, 0);              // b2 p3
    app(32'h13, CL_AMO, R_ADDI, 0, 0, 32'h8000_0010, 0, 0);               // p4
    app(32'h302F, CL_AMO, R_PRIME, 0, 0, 32'h8000_0010, 0, 0);            // p5 amoadd.d
    app(32'h63, CL_BRANCH, R_PRIME, 1, 1, 5, 0, 0);                       // b3 p6 beq -> b5
    app(32'h6F, CL_JAL, R_PRIME, 1, 1, 9999, 0, 0);                       // b4 p7 jal -> end
    app(32'hFEA5_9FE3, CL_BRANCH, R_PRIME, 1, 1, 20, 1, 1);               // b5 p8 bne, seed blk 20
    app(32'h00A5_C063, CL_BRANCH, R_PRIME, 1, 1, 30, 1, 1);               // b6 p9 blt, seed blk 30 gone
    app(32'h1234_5093, CL_I, R_PRIME, 1, 0, 0, 0, 1);                     // b7 p10 retained addi
    app(32'h0010_2073, CL_CSR, R_PRIME, 1, 0, 0, 0, 0);                   // b8 p11 csrrs fflags
    app(32'h0000_000F, CL_RAW, R_PRIME, 1, 0, 0, 0, 0);                   // b9 p12 fence
    for (int i = 0; i < 1100; i++) app(32'h33, CL_R, R_PRIME, 1, 0, 0, 0, 0);
    far_pos = 13 + 1100;
    app(32'h5063, CL_BRANCH, R_PRIME, 1, 1, 0, 0, 0);                     // bge -> b0, too far
    app(32'h17, CL_LOAD, R_AUIPC, 1, 0, 32'h8010_0F08, 0, 0);             // low part negative
    app(32'h2003, CL_LOAD, R_PRIME, 0, 0, 32'h8010_0F08, 0, 0);           // lw
    app(32'hC220_7053, CL_R1, R_PRIME, 1, 0, 0, 0, 0);                    // fcvt.l.d
    app(32'h0200_7043, CL_R4, R_PRIME, 1, 0, 0, 0, 0);                    // fmadd.d
    app(32'h0000_101B, CL_SHIFT, R_PRIME, 1, 0, 0, 0, 0);                 // slliw
    app(32'h17, CL_AMO, R_AUIPC, 1, 0, 32'h8010_0040, 0, 0);
    app(32'h13, CL_AMO, R_ADDI, 0, 0, 32'h8010_0040, 0, 0);
    app(32'h1000_302F, CL_AMO, R_PRIME, 0, 0, 32'h8010_0040, 0, 0);       // lr.d
    @(negedge clk); remap_we = 1; remap_old = 12'd20; remap_new = 12'd2;
    @(negedge clk); remap_we = 0;
    nblk = int'(blk_cnt);
  endtask

  entry_t outs [$];
  bit r4_rs3 [logic [4:0]];
  int cycles;
  task automatic run(input bit stall);
    logic [31:0] fix0;
    outs.delete();
    fix0 = n_fix;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin
      out_ready = stall ? ($urandom_range(0, 2) !== 0) : 1'b1;
      #1;
      if (out_valid && out_ready) outs.push_back(out_entry);
      @(negedge clk); cycles++;
    end
    chk(n_fix - fix0 === 2, "two repairs counted");
  endtask

  function automatic bit is_block_start(input logic [31:0] a);
    int p; p = int'((a - CB) >> 2);
    if (a === code_end) return 1;
    if (a < CB || p >= int'(instr_cnt)) return 0;
    return p <= 12 ? (p inside {0, 1, 3, 6, 7, 8, 9, 10, 11, 12}) : 1;
  endfunction

  task automatic check_outs();
    logic [31:0] a;
    chk(outs.size() === int'(instr_cnt), "one output per entry");
    chk(outs[0].instr[6:0] === 7'h33 && outs[0].instr[31:25] === 0 && outs[0].instr[14:12] === 0, "add keeps opcode");
    a = pc(1) + imm_u(outs[1].instr) + imm_i(outs[2].instr);
    chk(a === 32'h8010_0100, "auipc+ld reach target");
    chk(outs[1].instr[6:0] === 7'h17 && outs[2].instr[14:0] ==? 15'b011_?????_0000011, "auipc / ld opcodes");
    chk(outs[1].instr[11:7] === outs[2].instr[19:15] && outs[1].instr[11:7] !== 0, "ld uses auipc base");
    a = pc(3) + imm_u(outs[3].instr) + imm_i(outs[4].instr);
    chk(a === 32'h8010_0010, "amo address folded into data region");
    chk(outs[4].instr[11:7] === outs[3].instr[11:7] && outs[4].instr[19:15] === outs[3].instr[11:7]
        && outs[5].instr[19:15] === outs[3].instr[11:7], "amo base register chain");
    chk(outs[5].instr[31:25] === 7'h00 && outs[5].instr[14:0] ==? 15'b011_?????_0101111, "amoadd.d kept");
    chk(pc(6) + imm_b(outs[6].instr) === pc(8), "beq to block 5");
    chk(pc(7) + imm_j(outs[7].instr) === code_end, "jal past last block to code end");
    chk(pc(8) + imm_b(outs[8].instr) === pc(3), "retained bne to remapped block");
    chk(outs[8].instr[24:15] === 10'b01010_01011 && outs[8].instr[14:12] === 3'b001, "bne registers kept");
    chk(is_block_start(pc(9) + imm_b(outs[9].instr)), "deleted target: some block start");
    chk(outs[9].instr[24:12] === 13'b01010_01011_100, "blt registers kept");
    chk(outs[10].instr === 32'h1234_5093, "retained addi unchanged");
    chk(outs[11].instr[31:20] === 12'h001 && outs[11].instr[14:12] === 3'b010 && outs[11].instr[6:0] === 7'h73, "csr field kept");
    chk(outs[12].instr === 32'h0000_000F, "raw unchanged");
    chk(imm_b(outs[far_pos].instr) === 32'd4 && outs[far_pos].instr[14:0] ==? 15'b101_?????_1100011, "far branch repaired to +4");
    a = pc(far_pos + 1) + imm_u(outs[far_pos + 1].instr) + imm_i(outs[far_pos + 2].instr);
    chk(a === 32'h8010_0F08, "auipc+lw with a negative low part");
    chk(outs[far_pos + 3].instr[31:20] === 12'hC22 && outs[far_pos + 3].instr[14:12] === 3'b111
        && outs[far_pos + 3].instr[6:0] === 7'h53, "fcvt.l.d keeps its type field");
    chk(outs[far_pos + 4].instr[26:25] === 2'b01 && outs[far_pos + 4].instr[14:12] === 3'b111
        && outs[far_pos + 4].instr[6:0] === 7'h43, "fmadd.d keeps format and rounding mode");
    r4_rs3[outs[far_pos + 4].instr[31:27]] = 1;
    chk(outs[far_pos + 5].instr[31:25] === 7'd0 && outs[far_pos + 5].instr[14:12] === 3'b001
        && outs[far_pos + 5].instr[6:0] === 7'h1B, "slliw takes a 5-bit amount");
    a = pc(far_pos + 6) + imm_u(outs[far_pos + 6].instr) + imm_i(outs[far_pos + 7].instr);
    chk(a === 32'h8010_0040 && outs[far_pos + 8].instr[19:15] === outs[far_pos + 6].instr[11:7],
        "auipc+addi+lr.d reach target");
    chk(outs[far_pos + 8].instr[31:20] === 12'h100 && outs[far_pos + 8].instr[14:0] ==? 15'b011_?????_0101111,
        "lr.d has rs2 = x0");
    foreach (outs[p]) chk(int'(outs[p].blk) === (p <= 1 ? p : p <= 2 ? 1 : p <= 5 ? 2 : p <= far_pos + 1 ? p - 3 :
                                                      p <= far_pos + 6 ? p - 4 : far_pos + 2),
                          "block index carried");
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    fill();
    run(0);
    check_outs();
    $display("cycles %0d for %0d entries", cycles, int'(instr_cnt));
    chk(cycles <= int'(instr_cnt) + 8 && cycles >= int'(instr_cnt), "one entry per cycle");
    run(1);
    check_outs();
    for (int k = 0; k < 3; k++) begin run(1); check_outs(); end
    chk(r4_rs3.num() > 1, "fmadd.d third source varies");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

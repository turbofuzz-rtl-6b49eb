// tf_instr_library: the instruction library of the fuzzer.
//
// A table of LIB_N = 172 prime-instruction templates (opcode and function
// fields set, register and immediate fields zero) covering the user-level
// RV64 I, M, A, F/D and Zicsr subsets, stored contiguously in that order.
// Each subset can be switched on or off with `cat_en`. The fuzzer supplies an
// index `idx` (below LIB_N; larger values wrap); if that entry's subset is
// disabled the next enabled entry, cyclically, is returned, and ADDI if no
// subset is enabled.
//
// Besides the template the library reports the operand class, which tells
// operand assignment which fields to fill, and how many affiliated
// instructions the prime needs ahead of it. Loads, stores and JALR get an
// AUIPC that puts the target's upper bits in a base register. AMOs, LR and SC
// get AUIPC plus ADDI because they take no offset.
//
// Purely combinational. The paper describes a library holding the complete
// instruction set with subsets enabled at run time. Left out here are ECALL,
// EBREAK and the privileged instructions, which would need the exception
// templates. FENCE and FENCE.I have no free fields and are kept bit for bit.
// The CSR operand set (fflags, frm, fcsr, mscratch) and the
// affiliated-instruction rules are this design's choices.
module tf_instr_library
  import tf_pkg::*;
(
  input  logic [LIB_IW-1:0]  idx,
  input  logic [NUM_CAT-1:0] cat_en,
  output logic [31:0]        tmpl,
  output iclass_e            cls,
  output logic [2:0]         cat,
  output logic [1:0]         n_aff,
  output logic [LIB_IW-1:0]  sel_idx
);
  typedef struct packed {
    logic [31:0] tmpl;
    iclass_e     cls;
    logic [2:0]  cat;
  } lib_t;

  function automatic lib_t lib_entry(input logic [LIB_IW-1:0] i);
    case (i)
      8'd0:   return '{32'h0000_0033, CL_R,      3'(CAT_I)};     // add
      8'd1:   return '{32'h4000_0033, CL_R,      3'(CAT_I)};     // sub
      8'd2:   return '{32'h0000_1033, CL_R,      3'(CAT_I)};     // sll
      8'd3:   return '{32'h0000_2033, CL_R,      3'(CAT_I)};     // slt
      8'd4:   return '{32'h0000_3033, CL_R,      3'(CAT_I)};     // sltu
      8'd5:   return '{32'h0000_4033, CL_R,      3'(CAT_I)};     // xor
      8'd6:   return '{32'h0000_5033, CL_R,      3'(CAT_I)};     // srl
      8'd7:   return '{32'h4000_5033, CL_R,      3'(CAT_I)};     // sra
      8'd8:   return '{32'h0000_6033, CL_R,      3'(CAT_I)};     // or
      8'd9:   return '{32'h0000_7033, CL_R,      3'(CAT_I)};     // and
      8'd10:  return '{32'h0000_003B, CL_R,      3'(CAT_I)};     // addw
      8'd11:  return '{32'h4000_003B, CL_R,      3'(CAT_I)};     // subw
      8'd12:  return '{32'h0000_103B, CL_R,      3'(CAT_I)};     // sllw
      8'd13:  return '{32'h0000_503B, CL_R,      3'(CAT_I)};     // srlw
      8'd14:  return '{32'h4000_503B, CL_R,      3'(CAT_I)};     // sraw
      8'd15:  return '{32'h0000_0013, CL_I,      3'(CAT_I)};     // addi
      8'd16:  return '{32'h0000_2013, CL_I,      3'(CAT_I)};     // slti
      8'd17:  return '{32'h0000_3013, CL_I,      3'(CAT_I)};     // sltiu
      8'd18:  return '{32'h0000_4013, CL_I,      3'(CAT_I)};     // xori
      8'd19:  return '{32'h0000_6013, CL_I,      3'(CAT_I)};     // ori
      8'd20:  return '{32'h0000_7013, CL_I,      3'(CAT_I)};     // andi
      8'd21:  return '{32'h0000_001B, CL_I,      3'(CAT_I)};     // addiw
      8'd22:  return '{32'h0000_1013, CL_SHIFT,  3'(CAT_I)};     // slli
      8'd23:  return '{32'h0000_5013, CL_SHIFT,  3'(CAT_I)};     // srli
      8'd24:  return '{32'h4000_5013, CL_SHIFT,  3'(CAT_I)};     // srai
      8'd25:  return '{32'h0000_101B, CL_SHIFT,  3'(CAT_I)};     // slliw
      8'd26:  return '{32'h0000_501B, CL_SHIFT,  3'(CAT_I)};     // srliw
      8'd27:  return '{32'h4000_501B, CL_SHIFT,  3'(CAT_I)};     // sraiw
      8'd28:  return '{32'h0000_0037, CL_U,      3'(CAT_I)};     // lui
      8'd29:  return '{32'h0000_0017, CL_U,      3'(CAT_I)};     // auipc
      8'd30:  return '{32'h0000_0003, CL_LOAD,   3'(CAT_I)};     // lb
      8'd31:  return '{32'h0000_1003, CL_LOAD,   3'(CAT_I)};     // lh
      8'd32:  return '{32'h0000_2003, CL_LOAD,   3'(CAT_I)};     // lw
      8'd33:  return '{32'h0000_3003, CL_LOAD,   3'(CAT_I)};     // ld
      8'd34:  return '{32'h0000_4003, CL_LOAD,   3'(CAT_I)};     // lbu
      8'd35:  return '{32'h0000_5003, CL_LOAD,   3'(CAT_I)};     // lhu
      8'd36:  return '{32'h0000_6003, CL_LOAD,   3'(CAT_I)};     // lwu
      8'd37:  return '{32'h0000_0023, CL_STORE,  3'(CAT_I)};     // sb
      8'd38:  return '{32'h0000_1023, CL_STORE,  3'(CAT_I)};     // sh
      8'd39:  return '{32'h0000_2023, CL_STORE,  3'(CAT_I)};     // sw
      8'd40:  return '{32'h0000_3023, CL_STORE,  3'(CAT_I)};     // sd
      8'd41:  return '{32'h0000_0063, CL_BRANCH, 3'(CAT_I)};     // beq
      8'd42:  return '{32'h0000_1063, CL_BRANCH, 3'(CAT_I)};     // bne
      8'd43:  return '{32'h0000_4063, CL_BRANCH, 3'(CAT_I)};     // blt
      8'd44:  return '{32'h0000_5063, CL_BRANCH, 3'(CAT_I)};     // bge
      8'd45:  return '{32'h0000_6063, CL_BRANCH, 3'(CAT_I)};     // bltu
      8'd46:  return '{32'h0000_7063, CL_BRANCH, 3'(CAT_I)};     // bgeu
      8'd47:  return '{32'h0000_006F, CL_JAL,    3'(CAT_I)};     // jal
      8'd48:  return '{32'h0000_0067, CL_JALR,   3'(CAT_I)};     // jalr
      8'd49:  return '{32'h0FF0_000F, CL_RAW,    3'(CAT_I)};     // fence iorw, iorw
      8'd50:  return '{32'h0000_100F, CL_RAW,    3'(CAT_I)};     // fence.i
      8'd51:  return '{32'h0200_0033, CL_R,      3'(CAT_M)};     // mul
      8'd52:  return '{32'h0200_1033, CL_R,      3'(CAT_M)};     // mulh
      8'd53:  return '{32'h0200_2033, CL_R,      3'(CAT_M)};     // mulhsu
      8'd54:  return '{32'h0200_3033, CL_R,      3'(CAT_M)};     // mulhu
      8'd55:  return '{32'h0200_4033, CL_R,      3'(CAT_M)};     // div
      8'd56:  return '{32'h0200_5033, CL_R,      3'(CAT_M)};     // divu
      8'd57:  return '{32'h0200_6033, CL_R,      3'(CAT_M)};     // rem
      8'd58:  return '{32'h0200_7033, CL_R,      3'(CAT_M)};     // remu
      8'd59:  return '{32'h0200_003B, CL_R,      3'(CAT_M)};     // mulw
      8'd60:  return '{32'h0200_403B, CL_R,      3'(CAT_M)};     // divw
      8'd61:  return '{32'h0200_503B, CL_R,      3'(CAT_M)};     // divuw
      8'd62:  return '{32'h0200_603B, CL_R,      3'(CAT_M)};     // remw
      8'd63:  return '{32'h0200_703B, CL_R,      3'(CAT_M)};     // remuw
      8'd64:  return '{32'h1000_202F, CL_AMO,    3'(CAT_A)};     // lr.w
      8'd65:  return '{32'h1800_202F, CL_AMO,    3'(CAT_A)};     // sc.w
      8'd66:  return '{32'h0800_202F, CL_AMO,    3'(CAT_A)};     // amoswap.w
      8'd67:  return '{32'h0000_202F, CL_AMO,    3'(CAT_A)};     // amoadd.w
      8'd68:  return '{32'h2000_202F, CL_AMO,    3'(CAT_A)};     // amoxor.w
      8'd69:  return '{32'h6000_202F, CL_AMO,    3'(CAT_A)};     // amoand.w
      8'd70:  return '{32'h4000_202F, CL_AMO,    3'(CAT_A)};     // amoor.w
      8'd71:  return '{32'h8000_202F, CL_AMO,    3'(CAT_A)};     // amomin.w
      8'd72:  return '{32'hA000_202F, CL_AMO,    3'(CAT_A)};     // amomax.w
      8'd73:  return '{32'hC000_202F, CL_AMO,    3'(CAT_A)};     // amominu.w
      8'd74:  return '{32'hE000_202F, CL_AMO,    3'(CAT_A)};     // amomaxu.w
      8'd75:  return '{32'h1000_302F, CL_AMO,    3'(CAT_A)};     // lr.d
      8'd76:  return '{32'h1800_302F, CL_AMO,    3'(CAT_A)};     // sc.d
      8'd77:  return '{32'h0800_302F, CL_AMO,    3'(CAT_A)};     // amoswap.d
      8'd78:  return '{32'h0000_302F, CL_AMO,    3'(CAT_A)};     // amoadd.d
      8'd79:  return '{32'h2000_302F, CL_AMO,    3'(CAT_A)};     // amoxor.d
      8'd80:  return '{32'h6000_302F, CL_AMO,    3'(CAT_A)};     // amoand.d
      8'd81:  return '{32'h4000_302F, CL_AMO,    3'(CAT_A)};     // amoor.d
      8'd82:  return '{32'h8000_302F, CL_AMO,    3'(CAT_A)};     // amomin.d
      8'd83:  return '{32'hA000_302F, CL_AMO,    3'(CAT_A)};     // amomax.d
      8'd84:  return '{32'hC000_302F, CL_AMO,    3'(CAT_A)};     // amominu.d
      8'd85:  return '{32'hE000_302F, CL_AMO,    3'(CAT_A)};     // amomaxu.d
      8'd86:  return '{32'h0000_7053, CL_R,      3'(CAT_F)};     // fadd.s
      8'd87:  return '{32'h0800_7053, CL_R,      3'(CAT_F)};     // fsub.s
      8'd88:  return '{32'h1000_7053, CL_R,      3'(CAT_F)};     // fmul.s
      8'd89:  return '{32'h1800_7053, CL_R,      3'(CAT_F)};     // fdiv.s
      8'd90:  return '{32'h2000_0053, CL_R,      3'(CAT_F)};     // fsgnj.s
      8'd91:  return '{32'h2000_1053, CL_R,      3'(CAT_F)};     // fsgnjn.s
      8'd92:  return '{32'h2000_2053, CL_R,      3'(CAT_F)};     // fsgnjx.s
      8'd93:  return '{32'h2800_0053, CL_R,      3'(CAT_F)};     // fmin.s
      8'd94:  return '{32'h2800_1053, CL_R,      3'(CAT_F)};     // fmax.s
      8'd95:  return '{32'hA000_0053, CL_R,      3'(CAT_F)};     // fle.s
      8'd96:  return '{32'hA000_1053, CL_R,      3'(CAT_F)};     // flt.s
      8'd97:  return '{32'hA000_2053, CL_R,      3'(CAT_F)};     // feq.s
      8'd98:  return '{32'h0200_7053, CL_R,      3'(CAT_F)};     // fadd.d
      8'd99:  return '{32'h0A00_7053, CL_R,      3'(CAT_F)};     // fsub.d
      8'd100: return '{32'h1200_7053, CL_R,      3'(CAT_F)};     // fmul.d
      8'd101: return '{32'h1A00_7053, CL_R,      3'(CAT_F)};     // fdiv.d
      8'd102: return '{32'h2200_0053, CL_R,      3'(CAT_F)};     // fsgnj.d
      8'd103: return '{32'h2200_1053, CL_R,      3'(CAT_F)};     // fsgnjn.d
      8'd104: return '{32'h2200_2053, CL_R,      3'(CAT_F)};     // fsgnjx.d
      8'd105: return '{32'h2A00_0053, CL_R,      3'(CAT_F)};     // fmin.d
      8'd106: return '{32'h2A00_1053, CL_R,      3'(CAT_F)};     // fmax.d
      8'd107: return '{32'hA200_0053, CL_R,      3'(CAT_F)};     // fle.d
      8'd108: return '{32'hA200_1053, CL_R,      3'(CAT_F)};     // flt.d
      8'd109: return '{32'hA200_2053, CL_R,      3'(CAT_F)};     // feq.d
      8'd110: return '{32'h5800_7053, CL_R1,     3'(CAT_F)};     // fsqrt.s
      8'd111: return '{32'hC000_7053, CL_R1,     3'(CAT_F)};     // fcvt.w.s
      8'd112: return '{32'hD000_7053, CL_R1,     3'(CAT_F)};     // fcvt.s.w
      8'd113: return '{32'hC010_7053, CL_R1,     3'(CAT_F)};     // fcvt.wu.s
      8'd114: return '{32'hD010_7053, CL_R1,     3'(CAT_F)};     // fcvt.s.wu
      8'd115: return '{32'hC020_7053, CL_R1,     3'(CAT_F)};     // fcvt.l.s
      8'd116: return '{32'hD020_7053, CL_R1,     3'(CAT_F)};     // fcvt.s.l
      8'd117: return '{32'hC030_7053, CL_R1,     3'(CAT_F)};     // fcvt.lu.s
      8'd118: return '{32'hD030_7053, CL_R1,     3'(CAT_F)};     // fcvt.s.lu
      8'd119: return '{32'hE000_0053, CL_R1,     3'(CAT_F)};     // fmv.x.w
      8'd120: return '{32'hE000_1053, CL_R1,     3'(CAT_F)};     // fclass.s
      8'd121: return '{32'hF000_0053, CL_R1,     3'(CAT_F)};     // fmv.w.x
      8'd122: return '{32'h5A00_7053, CL_R1,     3'(CAT_F)};     // fsqrt.d
      8'd123: return '{32'hC200_7053, CL_R1,     3'(CAT_F)};     // fcvt.w.d
      8'd124: return '{32'hD200_7053, CL_R1,     3'(CAT_F)};     // fcvt.d.w
      8'd125: return '{32'hC210_7053, CL_R1,     3'(CAT_F)};     // fcvt.wu.d
      8'd126: return '{32'hD210_7053, CL_R1,     3'(CAT_F)};     // fcvt.d.wu
      8'd127: return '{32'hC220_7053, CL_R1,     3'(CAT_F)};     // fcvt.l.d
      8'd128: return '{32'hD220_7053, CL_R1,     3'(CAT_F)};     // fcvt.d.l
      8'd129: return '{32'hC230_7053, CL_R1,     3'(CAT_F)};     // fcvt.lu.d
      8'd130: return '{32'hD230_7053, CL_R1,     3'(CAT_F)};     // fcvt.d.lu
      8'd131: return '{32'hE200_0053, CL_R1,     3'(CAT_F)};     // fmv.x.d
      8'd132: return '{32'hE200_1053, CL_R1,     3'(CAT_F)};     // fclass.d
      8'd133: return '{32'hF200_0053, CL_R1,     3'(CAT_F)};     // fmv.d.x
      8'd134: return '{32'h4010_7053, CL_R1,     3'(CAT_F)};     // fcvt.s.d
      8'd135: return '{32'h4200_7053, CL_R1,     3'(CAT_F)};     // fcvt.d.s
      8'd136: return '{32'h0000_7043, CL_R4,     3'(CAT_F)};     // fmadd.s
      8'd137: return '{32'h0000_7047, CL_R4,     3'(CAT_F)};     // fmsub.s
      8'd138: return '{32'h0000_704B, CL_R4,     3'(CAT_F)};     // fnmsub.s
      8'd139: return '{32'h0000_704F, CL_R4,     3'(CAT_F)};     // fnmadd.s
      8'd140: return '{32'h0200_7043, CL_R4,     3'(CAT_F)};     // fmadd.d
      8'd141: return '{32'h0200_7047, CL_R4,     3'(CAT_F)};     // fmsub.d
      8'd142: return '{32'h0200_704B, CL_R4,     3'(CAT_F)};     // fnmsub.d
      8'd143: return '{32'h0200_704F, CL_R4,     3'(CAT_F)};     // fnmadd.d
      8'd144: return '{32'h0000_2007, CL_LOAD,   3'(CAT_F)};     // flw
      8'd145: return '{32'h0000_3007, CL_LOAD,   3'(CAT_F)};     // fld
      8'd146: return '{32'h0000_2027, CL_STORE,  3'(CAT_F)};     // fsw
      8'd147: return '{32'h0000_3027, CL_STORE,  3'(CAT_F)};     // fsd
      8'd148: return '{32'h0010_1073, CL_CSR,    3'(CAT_ZICSR)}; // csrrw fflags
      8'd149: return '{32'h0010_2073, CL_CSR,    3'(CAT_ZICSR)}; // csrrs fflags
      8'd150: return '{32'h0010_3073, CL_CSR,    3'(CAT_ZICSR)}; // csrrc fflags
      8'd151: return '{32'h0010_5073, CL_CSR,    3'(CAT_ZICSR)}; // csrrwi fflags
      8'd152: return '{32'h0010_6073, CL_CSR,    3'(CAT_ZICSR)}; // csrrsi fflags
      8'd153: return '{32'h0010_7073, CL_CSR,    3'(CAT_ZICSR)}; // csrrci fflags
      8'd154: return '{32'h0020_1073, CL_CSR,    3'(CAT_ZICSR)}; // csrrw frm
      8'd155: return '{32'h0020_2073, CL_CSR,    3'(CAT_ZICSR)}; // csrrs frm
      8'd156: return '{32'h0020_3073, CL_CSR,    3'(CAT_ZICSR)}; // csrrc frm
      8'd157: return '{32'h0020_5073, CL_CSR,    3'(CAT_ZICSR)}; // csrrwi frm
      8'd158: return '{32'h0020_6073, CL_CSR,    3'(CAT_ZICSR)}; // csrrsi frm
      8'd159: return '{32'h0020_7073, CL_CSR,    3'(CAT_ZICSR)}; // csrrci frm
      8'd160: return '{32'h0030_1073, CL_CSR,    3'(CAT_ZICSR)}; // csrrw fcsr
      8'd161: return '{32'h0030_2073, CL_CSR,    3'(CAT_ZICSR)}; // csrrs fcsr
      8'd162: return '{32'h0030_3073, CL_CSR,    3'(CAT_ZICSR)}; // csrrc fcsr
      8'd163: return '{32'h0030_5073, CL_CSR,    3'(CAT_ZICSR)}; // csrrwi fcsr
      8'd164: return '{32'h0030_6073, CL_CSR,    3'(CAT_ZICSR)}; // csrrsi fcsr
      8'd165: return '{32'h0030_7073, CL_CSR,    3'(CAT_ZICSR)}; // csrrci fcsr
      8'd166: return '{32'h3400_1073, CL_CSR,    3'(CAT_ZICSR)}; // csrrw mscratch
      8'd167: return '{32'h3400_2073, CL_CSR,    3'(CAT_ZICSR)}; // csrrs mscratch
      8'd168: return '{32'h3400_3073, CL_CSR,    3'(CAT_ZICSR)}; // csrrc mscratch
      8'd169: return '{32'h3400_5073, CL_CSR,    3'(CAT_ZICSR)}; // csrrwi mscratch
      8'd170: return '{32'h3400_6073, CL_CSR,    3'(CAT_ZICSR)}; // csrrsi mscratch
      default: return '{32'h3400_7073, CL_CSR,    3'(CAT_ZICSR)}; // csrrci mscratch
    endcase
  endfunction

  // The subsets occupy contiguous index ranges, in table order I, M, A, F/D,
  // Zicsr. The next enabled entry from j is j itself if its range is enabled,
  // else the first entry of the next enabled range, so one table read does.
  localparam int NSEG = 5;
  localparam int SEG_START [NSEG] = '{0, 51, 64, 86, 148};
  localparam int SEG_CAT   [NSEG] = '{CAT_I, CAT_M, CAT_A, CAT_F, CAT_ZICSR};

  lib_t pick;

  always_comb begin
    logic found;
    int   j, seg;
    logic [2:0] s2;
    j       = (int'(idx) >= LIB_N) ? int'(idx) - LIB_N : int'(idx);
    seg     = 0;
    for (int s = 1; s < NSEG; s++) if (j >= SEG_START[s]) seg = s;
    found   = 1'b0;
    sel_idx = LIB_IW'(LIB_ADDI);
    for (int k = 0; k < NSEG; k++) begin
      s2 = 3'((seg + k) % NSEG);
      if (!found && cat_en[SEG_CAT[s2]]) begin
        found   = 1'b1;
        sel_idx = LIB_IW'((k == 0) ? j : SEG_START[s2]);
      end
    end
    pick = found ? lib_entry(sel_idx) : '{INSN_NOP, CL_I, 3'(CAT_I)};
  end

  assign tmpl = pick.tmpl;
  assign cls  = pick.cls;
  assign cat  = pick.cat;

  always_comb begin
    case (pick.cls)
      CL_LOAD, CL_STORE, CL_JALR: n_aff = 2'd1;
      CL_AMO:                     n_aff = 2'd2;
      default:                    n_aff = 2'd0;
    endcase
  end
endmodule

// tb_rv_pkg: RISC-V decoding helpers for the testbenches.
//
// Written from the RISC-V base ISA encoding tables, independently of the
// fuzzer RTL, so testbenches can decode what the fuzzer produced and check it.
package tb_rv_pkg;
  function automatic logic [31:0] sext(input logic [31:0] v, input int bits);
    return 32'($signed(v << (32 - bits)) >>> (32 - bits));
  endfunction
  function automatic logic [31:0] imm_i(input logic [31:0] x);
    return sext({20'd0, x[31:20]}, 12);
  endfunction
  function automatic logic [31:0] imm_s(input logic [31:0] x);
    return sext({20'd0, x[31:25], x[11:7]}, 12);
  endfunction
  function automatic logic [31:0] imm_b(input logic [31:0] x);
    return sext({19'd0, x[31], x[7], x[30:25], x[11:8], 1'b0}, 13);
  endfunction
  function automatic logic [31:0] imm_j(input logic [31:0] x);
    return sext({11'd0, x[31], x[19:12], x[20], x[30:21], 1'b0}, 21);
  endfunction
  function automatic logic [31:0] imm_u(input logic [31:0] x);
    return {x[31:12], 12'd0};
  endfunction
  // Number of affiliated instructions the fuzzer should put before a prime.
  function automatic int n_aff_of(input logic [31:0] x);
    case (x[6:0])
      7'h03, 7'h07, 7'h23, 7'h27, 7'h67: return 1;
      7'h2F: return 2;
      default: return 0;
    endcase
  endfunction
  function automatic bit is_cf(input logic [31:0] x);
    return x[6:0] inside {7'h63, 7'h6F, 7'h67};
  endfunction
  function automatic bit is_store(input logic [31:0] x);
    return x[6:0] inside {7'h23, 7'h27, 7'h2F};
  endfunction
endpackage

// tb_tf_fuzz_context: draws many operand sets and checks the memory-access
// rules (stores always in the data region, loads in the data region about
// 3/4 of the time by default, all or none at 16/16 and 0/16), 8-byte
// alignment, the jump-distance bound and a non-zero base register.
module tb_tf_fuzz_context;
  import tf_pkg::*;
  logic clk = 0, rst_n = 0, next = 0, is_store = 0;
  logic [4:0] mem_data_prob = 5'd12;
  logic [4:0] rd, rs1, rs2, rb;
  logic [11:0] imm12; logic [19:0] imm20; logic [5:0] shamt;
  logic [31:0] mem_addr; logic mem_is_data;
  logic [BLK_W-1:0] jump_delta; logic [63:0] rnd;
  int checks = 0, failures = 0;

  tf_fuzz_context dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s addr=%h", msg, mem_addr); end
  endtask
  function automatic bit in_data(input logic [31:0] a);
    return a >= 32'h8010_0000 && a < 32'h8011_0000;
  endfunction
  function automatic bit in_code(input logic [31:0] a);
    return a >= 32'h8000_0000 && a < 32'h8000_4000;
  endfunction

  int n_data, n_load;
  int dseen [1:4];
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    n_data = 0; n_load = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      is_store = (i % 2 === 0);
      #1;
      chk(mem_addr[2:0] === 3'b000, "aligned");
      chk(rb !== 5'd0, "base register non-zero");
      chk(jump_delta >= 1 && jump_delta <= 4, "jump delta in 1..4");
      if (jump_delta >= 1 && jump_delta <= 4) dseen[int'(jump_delta)]++;
      if (is_store) chk(in_data(mem_addr), "store in data region");
      else begin
        n_load++;
        chk(in_data(mem_addr) || in_code(mem_addr), "load in a region");
        if (in_data(mem_addr)) n_data++;
      end
      next = 1; @(negedge clk); next = 0;
    end
    $display("data loads %0d of %0d", n_data, n_load);
    chk(n_data * 100 > n_load * 70 && n_data * 100 < n_load * 80, "3/4 of loads in data region");
    for (int d = 1; d <= 4; d++) chk(dseen[d] > 0, "every jump distance drawn");
    mem_data_prob = 5'd16; is_store = 0;
    for (int i = 0; i < 200; i++) begin next = 1; @(negedge clk); next = 0; #1; chk(in_data(mem_addr), "16/16 all data"); end
    mem_data_prob = 5'd0;
    for (int i = 0; i < 200; i++) begin next = 1; @(negedge clk); next = 0; #1; chk(in_code(mem_addr), "0/16 all code"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

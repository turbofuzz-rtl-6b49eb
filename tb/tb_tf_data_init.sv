// tb_tf_data_init: two instances, a 256-byte region (32 words) and the
// default 64 KiB region (8192 words). For several iteration numbers, with a
// randomly stalling write port, every write is checked against the
// testbench's own stepping of the 64-bit polynomial from the documented seed
// formula: addresses DATA_BASE + 8k in order, the exact number of words,
// `done` once at the end, and `busy` low afterwards. The same iteration
// number must reproduce the same contents and different numbers must give
// different contents. With the write port always ready a fill takes one
// cycle per word.
module tb_tf_data_init;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic start_s = 0, start_l = 0, rdy = 1;
  logic [31:0] id = 0;
  logic v_s, v_l, busy_s, busy_l, done_s, done_l;
  logic [31:0] a_s, a_l;
  logic [63:0] d_s, d_l;
  tf_data_init #(.DATA_SIZE_LOG2(8)) u_s (.clk, .rst_n, .start(start_s), .iter_id(id), .wr_valid(v_s),
    .wr_addr(a_s), .wr_data(d_s), .wr_ready(rdy), .busy(busy_s), .done(done_s));
  tf_data_init u_l (.clk, .rst_n, .start(start_l), .iter_id(id), .wr_valid(v_l),
    .wr_addr(a_l), .wr_data(d_l), .wr_ready(rdy), .busy(busy_l), .done(done_l));

  function automatic logic [63:0] step(input logic [63:0] s);
    // Galois step of x^64 + x^63 + x^61 + x^60 + 1.
    return s[0] ? ((s >> 1) ^ 64'hD800_0000_0000_0000) : (s >> 1);
  endfunction

  logic [63:0] sig [int];
  task automatic fill(input bit big, input logic [31:0] iid, input bit stall, output logic [63:0] h, output int cyc);
    logic [63:0] s;
    int n, nw, ndone;
    nw = big ? 8192 : 32;
    s = {iid * 32'h9E37_79B9, iid ^ 32'h5851_F42D};
    if (s == 0) s = 64'h0123_4567_89AB_CDEF;
    h = 0; n = 0; ndone = 0; cyc = 0;
    @(negedge clk); id = iid;
    if (big) start_l = 1; else start_s = 1;
    @(negedge clk); start_l = 0; start_s = 0;
    while (n < nw || (big ? busy_l : busy_s)) begin
      rdy = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (big ? v_l : v_s) begin
        if (rdy) begin
          chk((big ? a_l : a_s) === 32'h8010_0000 + 32'(8 * n), "address in order");
          chk((big ? d_l : d_s) === s, $sformatf("word %0d", n));
          h = (h * 64'd31) ^ (big ? d_l : d_s);
          s = step(s); n++;
        end
      end
      @(negedge clk); cyc++;
      if (big ? done_l : done_s) ndone++;
      if (cyc > 40000) break;
    end
    @(negedge clk);
    chk(n === nw && ndone === 1 && !(big ? busy_l : busy_s), "word count, one done");
  endtask

  initial begin
    logic [63:0] h1, h2, h3;
    int c;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      fill(0, $urandom(), 1, h1, c);
    end
    fill(0, 32'd7, 1, h1, c);
    fill(0, 32'd7, 0, h2, c);
    chk(h1 === h2, "same iteration, same contents");
    chk(c === 32, $sformatf("one word per cycle (%0d cycles)", c));
    fill(0, 32'd8, 0, h3, c);
    chk(h3 !== h1, "different iterations differ");
    fill(1, 32'd1, 1, h1, c);
    fill(1, 32'd2, 0, h2, c);
    chk(c === 8192, "full region in 8192 cycles");
    chk(h1 !== h2, "full-size fills differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tf_lfsr: checks the LFSR against a bit-serial model of the polynomial
// x^32 + x^22 + x^2 + x + 1, the enable, reseeding and that the state does not
// repeat or reach zero within 5000 steps.
module tb_tf_lfsr;
  logic clk = 0, rst_n = 0, en = 0, reseed = 0;
  logic [31:0] seed_val = '0, q;
  int checks = 0, failures = 0;

  tf_lfsr dut (.clk, .rst_n, .en, .reseed, .seed_val, .q);
  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // Model: Galois form, feedback bit applied to the tap positions 31, 21, 1, 0.
  function automatic logic [31:0] step(input logic [31:0] s);
    logic fb; logic [31:0] n;
    fb = s[0];
    n  = {1'b0, s[31:1]};
    if (fb) begin n[31] ^= 1'b1; n[21] ^= 1'b1; n[1] ^= 1'b1; n[0] ^= 1'b1; end
    return n;
  endfunction

  task automatic chk(input bit c, input string msg);
    checks++; if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [31:0] m, first;
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(q === 32'hACE1_2468, "reset seed");
    m = q; first = q;
    en = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      m = step(m);
      if (q !== m || q === 0 || q === first) begin failures++; $display("FAIL step %0d %h %h", i, q, m); end
      checks++;
    end
    en = 0;
    m = q;
    repeat (3) @(negedge clk);
    chk(q === m, "hold when disabled");
    reseed = 1; seed_val = 32'h1;
    @(negedge clk); reseed = 0;
    chk(q === 32'h1, "reseed");
    reseed = 1; seed_val = 32'h0;
    @(negedge clk); reseed = 0;
    chk(q === 32'hACE1_2468, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

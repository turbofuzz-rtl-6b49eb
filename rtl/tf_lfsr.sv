// tf_lfsr: 32-bit Galois linear feedback shift register, the random source
// of the fuzzer.
//
// Polynomial x^32 + x^22 + x^2 + x + 1 (maximal length, period 2^32-1). On
// every cycle with `en` high the state shifts right once and, if the bit
// shifted out was 1, is XORed with the tap mask. `reseed` loads `seed_val`
// (a zero seed is replaced by the default seed, since zero is the one state
// the register never leaves). `q` is the registered state, valid the cycle
// after reset and changing one cycle after each enabled step.
//
// The paper names an LFSR as the random generator; the polynomial, width and
// reseeding are this design's choices.
module tf_lfsr #(
  parameter int unsigned WIDTH = 32,
  parameter logic [WIDTH-1:0] SEED = 32'hACE1_2468,
  parameter logic [WIDTH-1:0] TAPS = 32'h8020_0003
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             reseed,
  input  logic [WIDTH-1:0] seed_val,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] nxt;

  always_comb begin
    nxt = q >> 1;
    if (q[0]) nxt = nxt ^ TAPS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= (SEED == '0) ? WIDTH'(1) : SEED;
    else if (reseed) q <= (seed_val == '0) ? SEED : seed_val;
    else if (en)     q <= nxt;
  end
endmodule

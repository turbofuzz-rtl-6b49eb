// tf_cov_instrument: register-coverage point of one instrumented module.
//
// The instrumentation pass (done on the processor's netlist, outside this
// RTL) finds the control registers of a module and wires their values to
// `ctrl`, packed with register 0 in the lowest bits. This block maps the
// control registers to a coverage point index of MAX_STATE bits without
// random shifts and zero padding:
//   * registers are laid out one after the other; register i starts at bit
//     offset o_i, with o_0 = 0 and o_(i+1) = (o_i + W_i) mod MAX_STATE
//     (the rolled-back offset of the paper's Eq. 2),
//   * bit b of register i lands on index bit (o_i + b) mod MAX_STATE, and
//     overlapping bits are XORed.
// Because no index bit is a padded constant, every index can be reached.
//
// A 2^MAX_STATE-bit coverage map records the points seen. On each `sample`
// the current point is looked up; a point seen for the first time is set and
// counted in `n_cov_iter` (points new in this iteration, cleared by
// `iter_start`) and `n_cov_total`. The feedback value `n_cov_weighted` is
// `n_cov_iter` shifted left by SHIFT (SHIFT > 0) or right by -SHIFT
// (SHIFT < 0): the per-module weighting that keeps modules with many toggling
// multiplexers (multipliers, dividers) from dominating the feedback.
// After reset and on `clear` the map is cleared, one entry per cycle;
// `busy` is high meanwhile and samples are ignored. One sample per cycle; a
// point is marked the cycle after it is sampled.
//
// MAX_STATE = 15 is the "cov3" width the paper uses in its final build. The
// register widths are examples (the real ones come from the instrumented
// processor); SHIFT defaults to no weighting.
module tf_cov_instrument #(
  parameter int unsigned NUM_REGS  = 4,
  parameter int unsigned REG_W [NUM_REGS] = '{8, 6, 5, 7},
  parameter int unsigned MAX_STATE = 15,
  parameter int          SHIFT     = 0,
  localparam int unsigned TOTAL_W  = sum_w()
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               iter_start,
  input  logic               sample,
  input  logic [TOTAL_W-1:0] ctrl,
  output logic               busy,
  output logic [MAX_STATE-1:0] index,
  output logic [31:0]        n_cov_iter,
  output logic [31:0]        n_cov_weighted,
  output logic [31:0]        n_cov_total
);
  function automatic int unsigned sum_w();
    int unsigned s = 0;
    for (int i = 0; i < NUM_REGS; i++) s += REG_W[i];
    return s;
  endfunction

  // Bit position of flat control bit k (register i, bit b) in the index.
  function automatic int unsigned pos_of(input int unsigned k);
    int unsigned off = 0, base = 0;
    for (int i = 0; i < NUM_REGS; i++) begin
      if (k >= base && k < base + REG_W[i]) return (off + (k - base)) % MAX_STATE;
      off  = (off + REG_W[i]) % MAX_STATE;
      base = base + REG_W[i];
    end
    return 0;
  endfunction

  always_comb begin
    index = '0;
    for (int unsigned k = 0; k < TOTAL_W; k++) index[pos_of(k)] ^= ctrl[k];
  end

  localparam int unsigned MAP_SIZE = 1 << MAX_STATE;

  logic                 map [MAP_SIZE];
  logic [MAX_STATE:0]   clr_ptr;
  logic                 hit_new;

  assign busy    = !clr_ptr[MAX_STATE];
  assign hit_new = sample && !busy && !map[index];

  always_ff @(posedge clk) begin
    if (busy)         map[clr_ptr[MAX_STATE-1:0]] <= 1'b0;
    else if (hit_new) map[index] <= 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_ptr     <= '0;
      n_cov_iter  <= '0;
      n_cov_total <= '0;
    end else if (clear) begin
      clr_ptr     <= '0;
      n_cov_iter  <= '0;
      n_cov_total <= '0;
    end else begin
      if (busy) clr_ptr <= clr_ptr + 1'b1;
      if (iter_start)   n_cov_iter <= '0;
      else if (hit_new) n_cov_iter <= n_cov_iter + 1'b1;
      if (hit_new)      n_cov_total <= n_cov_total + 1'b1;
    end
  end

  always_comb begin
    if (SHIFT >= 0) n_cov_weighted = n_cov_iter << SHIFT;
    else            n_cov_weighted = n_cov_iter >> (-SHIFT);
  end
endmodule

// tf_data_init: fills the data region with fresh pseudo-random contents
// before every iteration.
//
// Loads read random values and stores overwrite parts of the data region, so
// each iteration starts from a data region whose contents depend only on the
// iteration: on `start` a 64-bit LFSR is seeded from `iter_id`
// (seed = {iter_id * 0x9E3779B9, iter_id ^ 0x5851F42D}, a zero seed replaced
// by the LFSR default) and the region DATA_BASE .. DATA_BASE + 2^DATA_SIZE_LOG2
// is written one 64-bit word per accepted cycle: word k goes to
// DATA_BASE + 8*k and holds the LFSR state after k steps. `wr_valid` stays
// high until the last word is accepted (`wr_ready`); `busy` is high from the
// cycle after `start` until then, and `done` pulses once. A `start` while
// busy restarts the fill.
//
// Polynomial: x^64 + x^63 + x^61 + x^60 + 1 (Galois form, tap mask
// 0xD800_0000_0000_0000), maximal length.
//
// Filling the data region from an LFSR with a unique seed per iteration
// follows the paper; the seed formula, the word width and the write port are
// this design's choices.
module tf_data_init #(
  parameter logic [31:0] DATA_BASE      = 32'h8010_0000,
  parameter int unsigned DATA_SIZE_LOG2 = 16,
  localparam int unsigned NW_LOG2       = DATA_SIZE_LOG2 - 3
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] iter_id,
  output logic        wr_valid,
  output logic [31:0] wr_addr,
  output logic [63:0] wr_data,
  input  logic        wr_ready,
  output logic        busy,
  output logic        done
);
  logic [NW_LOG2:0] k;
  logic [63:0]      seed;
  logic             fire;

  assign seed = {iter_id * 32'h9E37_79B9, iter_id ^ 32'h5851_F42D};
  assign fire = wr_valid && wr_ready;

  tf_lfsr #(.WIDTH(64), .SEED(64'h0123_4567_89AB_CDEF), .TAPS(64'hD800_0000_0000_0000)) u_lfsr (
    .clk, .rst_n, .en(fire), .reseed(start), .seed_val(seed), .q(wr_data));

  assign wr_valid = busy;
  assign wr_addr  = DATA_BASE + 32'({k[NW_LOG2-1:0], 3'b000});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      k    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        k    <= '0;
      end else if (fire) begin
        k <= k + 1'b1;
        if (k == (NW_LOG2+1)'((1 << NW_LOG2) - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule

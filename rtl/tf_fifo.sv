// tf_fifo: synchronous FIFO, first-word fall-through.
//
// DEPTH entries of WIDTH bits. `push` with `!full` stores `din`; `dout` shows
// the oldest entry whenever `!empty`, and `pop` removes it. Push and pop may
// happen in the same cycle. Used by the differential checker to buffer the
// commit streams of the processor and of the reference model.
module tf_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      level
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign full    = (level == (AW+1)'(DEPTH));
  assign empty   = (level == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; level <= '0;
    end else begin
      if (do_push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      level <= level + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
endmodule

// tf_stimuli_select: stimulus selection between the fuzzer and deepExplore.
//
// Two entry streams arrive, one from the fuzzer (direct or mutation mode) and
// one from the deepExplore engine; `sel_deep` chooses which one reaches the
// output. The chosen stream is numbered: `out_pos` is the instruction's
// position within the iteration (reset by `iter_start`), and `out_addr` is the
// byte address at which it is written into the instruction segment,
// CODE_BASE + 4*position. The same position indexes the staging slot of the
// seed memory. `out_ready` is returned to the selected source only.
// `n_fuzz`/`n_deep` count the instructions each source delivered.
//
// The paper names the selector; the numbering and counters are this design's.
module tf_stimuli_select
  import tf_pkg::*;
#(
  parameter logic [31:0] CODE_BASE = 32'h8000_0000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             iter_start,
  input  logic             sel_deep,
  input  logic             fz_valid,
  input  entry_t           fz_entry,
  output logic             fz_ready,
  input  logic             de_valid,
  input  entry_t           de_entry,
  output logic             de_ready,
  output logic             out_valid,
  output entry_t           out_entry,
  output logic [BLK_W-1:0] out_pos,
  output logic [31:0]      out_addr,
  input  logic             out_ready,
  output logic [BLK_W:0]   iter_count,
  output logic [31:0]      n_fuzz,
  output logic [31:0]      n_deep
);
  logic fire;

  assign out_valid = sel_deep ? de_valid : fz_valid;
  assign out_entry = sel_deep ? de_entry : fz_entry;
  assign fz_ready  = !sel_deep && out_ready;
  assign de_ready  = sel_deep && out_ready;
  assign fire      = out_valid && out_ready;
  assign out_pos   = iter_count[BLK_W-1:0];
  assign out_addr  = CODE_BASE + 32'({iter_count[BLK_W-1:0], 2'b00});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iter_count <= '0;
      n_fuzz     <= '0;
      n_deep     <= '0;
    end else begin
      if (iter_start) iter_count <= '0;
      else if (fire)  iter_count <= iter_count + 1'b1;
      if (fire && !sel_deep) n_fuzz <= n_fuzz + 1'b1;
      if (fire && sel_deep)  n_deep <= n_deep + 1'b1;
    end
  end
endmodule

// tf_diff_checker: instruction-level differential self-checking.
//
// The processor under test (in programmable logic) and the reference ISA
// emulator (software on the hard processor) each report every retired
// instruction as a commit record {pc, instr, rd, wdata}. The two streams run
// at different speeds, so each goes into a FIFO; `dut_ready`/`ref_ready` drop
// when a FIFO is full, which stalls the faster side and keeps the two within
// FIFO_DEPTH instructions of each other. Whenever both FIFOs hold a record the
// heads are compared and popped together (one comparison per cycle).
//
// On the first difference the checker stops popping, raises `paused` (the
// fuzzer, the processor and the reference stop), pulses `snap_trig` for one
// cycle to start the hardware snapshot, and holds both offending records in
// `mm_dut`/`mm_ref` for debugging. `resume` drops the mismatching pair and
// continues. `n_checked` counts matching instructions, `n_mismatch`
// mismatches.
//
// Comparing every retired instruction and pausing with a snapshot on a
// mismatch follows the paper; the record layout, the FIFOs and the resume rule
// are this design's choices.
module tf_diff_checker
  import tf_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        dut_valid,
  input  commit_t     dut_rec,
  output logic        dut_ready,
  input  logic        ref_valid,
  input  commit_t     ref_rec,
  output logic        ref_ready,
  input  logic        resume,
  output logic        paused,
  output logic        snap_trig,
  output commit_t     mm_dut,
  output commit_t     mm_ref,
  output logic [31:0] n_checked,
  output logic [31:0] n_mismatch
);
  localparam int unsigned RW = $bits(commit_t);

  commit_t d_head, r_head;
  logic    d_full, d_empty, r_full, r_empty, pop, differ;

  tf_fifo #(.WIDTH(RW), .DEPTH(FIFO_DEPTH)) u_dfifo (
    .clk, .rst_n, .push(dut_valid && dut_ready), .din(dut_rec), .pop(pop),
    .dout(d_head), .full(d_full), .empty(d_empty), .level());
  tf_fifo #(.WIDTH(RW), .DEPTH(FIFO_DEPTH)) u_rfifo (
    .clk, .rst_n, .push(ref_valid && ref_ready), .din(ref_rec), .pop(pop),
    .dout(r_head), .full(r_full), .empty(r_empty), .level());

  assign dut_ready = !d_full;
  assign ref_ready = !r_full;
  assign differ    = (d_head != r_head);
  // Compare and pop while running; on resume drop the mismatching pair.
  assign pop       = !d_empty && !r_empty && (paused ? resume : !differ);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      paused     <= 1'b0;
      snap_trig  <= 1'b0;
      mm_dut     <= '0;
      mm_ref     <= '0;
      n_checked  <= '0;
      n_mismatch <= '0;
    end else begin
      snap_trig <= 1'b0;
      if (paused) begin
        if (resume) paused <= 1'b0;
      end else if (!d_empty && !r_empty) begin
        if (differ) begin
          paused     <= 1'b1;
          snap_trig  <= 1'b1;
          mm_dut     <= d_head;
          mm_ref     <= r_head;
          n_mismatch <= n_mismatch + 1'b1;
        end else begin
          n_checked <= n_checked + 1'b1;
        end
      end
    end
  end
endmodule

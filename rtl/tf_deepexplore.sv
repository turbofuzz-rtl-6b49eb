// tf_deepexplore: the deepExplore engine (stage 1 of hybrid fuzzing).
//
// Representative instruction intervals of ordinary benchmarks are selected
// offline (SimPoint-style clustering of basic-block vectors) and each is
// preceded by initialisation instructions that rebuild the architectural
// state (integer, FP and CSR registers) the interval expects. The host loads
// them through the `iv_*` write port: instruction words, an `init` flag per
// word, and a length per interval; `n_intervals` says how many are loaded.
//
// After `enable` the engine runs stage 1 as a sequence of iterations. Each
// time it is `ready` and the top asserts `iter_start`, it streams one interval
// on `out_*` (one instruction per two cycles, `out_last` on the final one) and
// then waits for the coverage gain of that run on `fb_valid`/`fb_gain`.
//   Phase A (play): every interval once, unchanged. An interval whose gain
//     reaches `mark_thresh` is marked.
//   Phase B (refine): rounds over the marked intervals. Registers and
//     instruction order are kept (the dependency structure), but the
//     immediates of the initialisation instructions (ADDI/ADDIW/LUI and other
//     OP-IMM forms, which set up data and addresses) are XORed with a mask
//     derived from a per-interval mutation key and the instruction position.
//     A key that beats the interval's best gain so far is kept; the next key
//     differs from the best one in one random bit (hill climbing).
//   A round whose total gain is below `plateau_thresh`, or MAX_ROUNDS rounds,
//   ends stage 1: `stage` becomes 2 and the fuzzer takes over.
// Emitted entries are CL_RAW one-instruction blocks, so if they are kept as
// seeds the mutation engine never rewrites their bits.
//
// Stages, marking by coverage gain and mutating only the initialisation
// state follow the paper. The thresholds, the XOR mask, the hill-climbing rule
// and all sizes are this design's choices.
module tf_deepexplore
  import tf_pkg::*;
#(
  parameter int unsigned NUM_INTERVALS = 16,
  parameter int unsigned INTERVAL_LEN  = 1024,
  parameter int unsigned MAX_ROUNDS    = 8,
  parameter logic [31:0] SEED          = 32'hDEE9_E791,
  localparam int unsigned KW           = $clog2(NUM_INTERVALS),
  localparam int unsigned LW           = $clog2(INTERVAL_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  // interval loading
  input  logic          iv_we,
  input  logic [KW-1:0] iv_sel,
  input  logic [LW-1:0] iv_idx,
  input  logic [31:0]   iv_instr,
  input  logic          iv_init,
  input  logic          iv_len_we,
  input  logic [LW:0]   iv_len,
  input  logic [KW:0]   n_intervals,
  // control
  input  logic          enable,
  input  logic [31:0]   mark_thresh,
  input  logic [31:0]   plateau_thresh,
  output logic [1:0]    stage,
  output logic          phase_refine,
  output logic          ready,
  input  logic          iter_start,
  output logic [KW-1:0] cur_interval,
  // stimulus stream
  output logic          out_valid,
  output entry_t        out_entry,
  output logic          out_last,
  input  logic          out_ready,
  // feedback
  input  logic          fb_valid,
  input  logic [31:0]   fb_gain,
  output logic [KW:0]   n_marked
);
  typedef enum logic [2:0] {S_IDLE, S_PICK, S_READY, S_RD, S_OUT, S_WAIT, S_DONE} state_e;
  state_e st;

  logic [32:0] iv_mem [NUM_INTERVALS * INTERVAL_LEN];
  logic [LW:0] len_tab [NUM_INTERVALS];
  logic [NUM_INTERVALS-1:0] mark;
  logic [31:0] best_gain [NUM_INTERVALS];
  logic [31:0] best_key  [NUM_INTERVALS];

  logic [KW:0]  k;          // interval being considered (one past the end = none)
  logic [LW:0]  pos;
  logic [31:0]  key, round_gain, q;
  logic [7:0]   rounds;
  logic [32:0]  rd_word;

  tf_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en(st == S_PICK), .reseed(1'b0), .seed_val('0), .q(q));

  // Host loading port.
  always_ff @(posedge clk) begin
    if (iv_we) iv_mem[32'(iv_sel) * INTERVAL_LEN + 32'(iv_idx)] <= {iv_init, iv_instr};
    if (iv_len_we) len_tab[iv_sel] <= iv_len;
    if (st == S_RD) rd_word <= iv_mem[32'(k[KW-1:0]) * INTERVAL_LEN + 32'(pos[LW-1:0])];
  end

  // Immediate mask of an initialisation instruction.
  function automatic logic [31:0] mut_mask(input logic [31:0] kk, input logic [LW:0] p);
    logic [31:0] h;
    h = kk ^ (32'(p) * 32'h9E37_79B1);
    return h ^ (h >> 15);
  endfunction

  logic [31:0] out_instr;
  always_comb begin
    logic [31:0] m;
    m = mut_mask(key, pos);
    out_instr = rd_word[31:0];
    if (phase_refine && rd_word[32]) begin
      case (rd_word[6:0])
        7'h13, 7'h1B: if (!(rd_word[13:12] == 2'b01)) out_instr[31:20] = rd_word[31:20] ^ m[11:0];
        7'h37:        out_instr[31:12] = rd_word[31:12] ^ m[19:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    out_entry       = '0;
    out_entry.instr = out_instr;
    out_entry.cls   = CL_RAW;
    out_entry.role  = R_PRIME;
    out_entry.first = 1'b1;
    out_entry.blk   = BLK_W'(pos);
  end
  assign out_valid    = (st == S_OUT);
  assign out_last     = (st == S_OUT) && (pos + 1'b1 >= len_tab[k[KW-1:0]]);
  assign ready        = (st == S_READY);
  assign cur_interval = k[KW-1:0];

  logic k_end;
  assign k_end = (k >= n_intervals) || (k >= (KW+1)'(NUM_INTERVALS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; stage <= 2'd0; phase_refine <= 1'b0;
      k <= '0; pos <= '0; key <= '0; round_gain <= '0; rounds <= '0;
      mark <= '0; n_marked <= '0;
      for (int i = 0; i < NUM_INTERVALS; i++) begin
        best_gain[i] <= '0;
        best_key[i]  <= '0;
      end
    end else begin
      case (st)
        S_IDLE: if (enable) begin
          st <= S_PICK; stage <= 2'd1; phase_refine <= 1'b0;
          k <= '0; mark <= '0; n_marked <= '0; rounds <= '0;
        end
        // Find the next interval to run (one candidate per cycle).
        S_PICK: begin
          if (k_end) begin
            if (!phase_refine) begin
              phase_refine <= 1'b1;
              k <= '0; round_gain <= '0;
              if (n_marked == '0) st <= S_DONE;
            end else if (round_gain < plateau_thresh || rounds + 8'd1 >= 8'(MAX_ROUNDS)) begin
              st <= S_DONE;
            end else begin
              rounds <= rounds + 8'd1;
              k <= '0; round_gain <= '0;
            end
          end else if (len_tab[k[KW-1:0]] == '0 || (phase_refine && !mark[k[KW-1:0]])) begin
            k <= k + 1'b1;
          end else begin
            key <= (best_key[k[KW-1:0]] == '0) ? (q | 32'd1)
                                                : best_key[k[KW-1:0]] ^ (32'd1 << q[4:0]);
            st  <= S_READY;
          end
        end
        S_READY: if (iter_start) begin pos <= '0; st <= S_RD; end
        S_RD:  st <= S_OUT;
        S_OUT: if (out_ready) begin
          if (out_last) st <= S_WAIT;
          else begin pos <= pos + 1'b1; st <= S_RD; end
        end
        S_WAIT: if (fb_valid) begin
          if (!phase_refine) begin
            best_gain[k[KW-1:0]] <= fb_gain;
            if (fb_gain >= mark_thresh) begin
              mark[k[KW-1:0]] <= 1'b1;
              n_marked <= n_marked + 1'b1;
            end
          end else begin
            round_gain <= round_gain + fb_gain;
            if (fb_gain > best_gain[k[KW-1:0]]) begin
              best_gain[k[KW-1:0]] <= fb_gain;
              best_key[k[KW-1:0]]  <= key;
            end
          end
          k  <= k + 1'b1;
          st <= S_PICK;
        end
        S_DONE: stage <= 2'd2;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule

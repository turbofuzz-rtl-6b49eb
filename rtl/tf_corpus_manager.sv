// tf_corpus_manager: seed selection and coverage-based corpus scheduling.
//
// Keeps, for each of NUM_SEEDS logical seeds, its physical slot in the seed
// memory, its length and its recorded coverage improvement (gain). Seeds
// 0..count-1 are valid. One further physical slot is the staging slot
// (`staging`) that receives the iteration being run.
//
// Selection (`sel_req`, answered by `sel_ack` on the next cycle): with
// probability sel_prio_prob/16 (3/4 by default) the seed with the highest
// gain, otherwise a uniformly random valid seed.
//
// Scheduling (`commit` at the end of an iteration, with its gain and length):
//   generated iteration (direct mode or deepExplore): kept only if gain > 0.
//     With free room it becomes seed `count`; in a full corpus it replaces the
//     seed with the lowest gain if its own gain is higher. Keeping it means
//     swapping the staging slot number with the victim's slot number.
//   mutated iteration: the parent seed's gain is overwritten with the gain
//     just measured, so seeds that stop finding coverage sink and are
//     eventually evicted, while productive old seeds stay.
// `act` reports what a commit did.
//
// Following the paper: 3/4 selection bias, add-on-improvement, evict the
// lowest improvement, update the parent's improvement after mutation. This
// design's choices: a new seed must beat the victim to replace it, the gain is
// overwritten rather than accumulated, ties pick the lowest index.
module tf_corpus_manager
  import tf_pkg::*;
#(
  parameter int unsigned NUM_SEEDS = 16,
  parameter logic [31:0] SEED      = 32'hC0DE_5EED,
  localparam int unsigned SLOT_W   = $clog2(NUM_SEEDS + 1),
  localparam int unsigned SEL_W    = $clog2(NUM_SEEDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [4:0]        sel_prio_prob,
  input  logic              sel_req,
  output logic              sel_ack,
  output logic [SEL_W-1:0]  sel_seed,
  output logic [SLOT_W-1:0] sel_slot,
  output logic [BLK_W:0]    sel_len,
  output logic              sel_prio,
  output logic [SLOT_W-1:0] staging,
  input  logic              commit,
  input  mode_e             commit_mode,
  input  logic [SEL_W-1:0]  commit_parent,
  input  logic [31:0]       commit_gain,
  input  logic [BLK_W:0]    commit_len,
  output logic              act_valid,
  output logic [1:0]        act,        // 0 reject, 1 add, 2 replace, 3 update
  output logic [SEL_W:0]    count
);
  logic [SLOT_W-1:0] phys [NUM_SEEDS];
  logic [31:0]       gain [NUM_SEEDS];
  logic [BLK_W:0]    len  [NUM_SEEDS];
  logic [31:0]       q;

  tf_lfsr #(.SEED(SEED)) u_lfsr (.clk, .rst_n, .en(sel_req), .reseed(1'b0), .seed_val('0), .q(q));

  // Best and worst valid seeds.
  logic [SEL_W-1:0] best, worst;
  always_comb begin
    best  = '0;
    worst = '0;
    for (int i = 1; i < NUM_SEEDS; i++) begin
      if ((SEL_W+1)'(i) < count) begin
        if (gain[i] > gain[best])  best  = SEL_W'(i);
        if (gain[i] < gain[worst]) worst = SEL_W'(i);
      end
    end
  end

  logic [SEL_W-1:0] pick;
  logic             prio_now;
  assign prio_now = ({1'b0, q[3:0]} < sel_prio_prob);
  assign pick     = prio_now ? best
                  : SEL_W'(32'(q[31:8]) % 32'((count == '0) ? (SEL_W+1)'(1) : count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_SEEDS; i++) begin
        phys[i] <= SLOT_W'(i);
        gain[i] <= '0;
        len[i]  <= '0;
      end
      staging   <= SLOT_W'(NUM_SEEDS);
      count     <= '0;
      sel_ack   <= 1'b0;
      sel_seed  <= '0;
      sel_slot  <= '0;
      sel_len   <= '0;
      sel_prio  <= 1'b0;
      act_valid <= 1'b0;
      act       <= '0;
    end else begin
      sel_ack   <= sel_req;
      act_valid <= commit;
      if (sel_req) begin
        sel_seed <= pick;
        sel_slot <= phys[pick];
        sel_len  <= len[pick];
        sel_prio <= prio_now;
      end
      if (commit) begin
        if (commit_mode == M_MUTATE) begin
          gain[commit_parent] <= commit_gain;
          act <= 2'd3;
        end else if (commit_gain == '0) begin
          act <= 2'd0;
        end else if (count < (SEL_W+1)'(NUM_SEEDS)) begin
          phys[count[SEL_W-1:0]] <= staging;
          staging                <= phys[count[SEL_W-1:0]];
          gain[count[SEL_W-1:0]] <= commit_gain;
          len[count[SEL_W-1:0]]  <= commit_len;
          count                  <= count + 1'b1;
          act                    <= 2'd1;
        end else if (commit_gain > gain[worst]) begin
          phys[worst] <= staging;
          staging     <= phys[worst];
          gain[worst] <= commit_gain;
          len[worst]  <= commit_len;
          act         <= 2'd2;
        end else begin
          act <= 2'd0;
        end
      end
    end
  end

  // A mutation commit must name a valid parent.
  a_parent_valid: assert property (@(posedge clk) disable iff (!rst_n)
    commit && commit_mode == M_MUTATE |-> (SEL_W+1)'(commit_parent) < count);
endmodule

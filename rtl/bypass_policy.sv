// bypass_policy: SCM-aware DRAM-cache bypass decision for one channel.
//
// A miss is filled into the DRAM cache only if caching it is worth more than
// what it would displace.  Two scores drive the decision:
//  * the SCM penalty score (from scm_penalty_unit) measures spatial locality
//    and write intensity;
//  * the DRAM-affinity score, penalty x the page's activation counter, adds
//    hotness.
// Both are discretised into N_LEVELS levels with a fixed interval between 0
// and the largest value seen so far (the current value counts as seen):
//   level = min(N_LEVELS-1, floor(score * N_LEVELS / max)).
// Decision for a miss, in the paper's order:
//  1. penalty level <= level of the channel's moving average -> bypass
//     (l1_pass = 0); no DRAM access is needed for this test.
//  2. otherwise, an invalid victim is replaced; a valid one is replaced only
//     if the new line's affinity level is higher than the victim's stored
//     level (read from the AMIL column); if not, the miss bypasses and the
//     victim's level is decremented with probability p_dec = act_cnt/act_max.
// The moving average of the penalty score is updated on DRAM-cache hits with
// weight 1/AVG_DIV (1 %) and held in fixed point with 8 fraction bits; its
// level is re-discretised every F_UPDATE average updates.  Reading F_UPDATE
// as that re-discretisation interval, fixed-point arithmetic in place of an
// FPU, and a 16-bit LFSR for p_dec are this design's choices.
//
// Interface: the decision outputs are combinational in miss_score, act_cnt,
// act_max, victim_valid and victim_lvl.  A one-cycle miss_commit pulse folds
// miss_score and its affinity score into the maxima and advances the LFSR;
// hit_valid feeds a hit's score into the average.  Registers: average,
// maximum and level for both scores, as in the paper's six registers.
module bypass_policy
  import hms_pkg::*;
#(
  parameter int SCORE_W  = 32,
  parameter int CNT_W    = 8,
  parameter int F_UPDATE = 100,
  parameter int AVG_DIV  = 100
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               enable,       // 0: never bypass
  // hit sample
  input  logic               hit_valid,
  input  logic [SCORE_W-1:0] hit_score,
  // miss under decision
  input  logic [SCORE_W-1:0] miss_score,
  input  logic [CNT_W-1:0]   act_cnt,
  input  logic [CNT_W-1:0]   act_max,
  input  logic               victim_valid,
  input  logic [LVL_W-1:0]   victim_lvl,
  input  logic               miss_commit,
  output logic [LVL_W-1:0]   pen_lvl,
  output logic [LVL_W-1:0]   avg_lvl,
  output logic               l1_pass,
  output logic [LVL_W-1:0]   aff_lvl,
  output logic               fill,
  output logic               dec_victim
);
  localparam int FRAC = 8;
  localparam int AW   = SCORE_W + FRAC + 2;

  logic [SCORE_W-1:0] max_pen, max_aff;
  logic [AW-1:0]      avg_fx;          // average penalty, fixed point
  logic [LVL_W-1:0]   avg_lvl_q;
  logic [$clog2(F_UPDATE+1)-1:0] upd_cnt;
  logic [15:0]        lfsr;

  function automatic logic [LVL_W-1:0] discretise(input logic [SCORE_W-1:0] v,
                                                  input logic [SCORE_W-1:0] mx);
    logic [SCORE_W+LVL_W:0] q;
    if (mx == '0) return '0;
    q = ((SCORE_W+LVL_W+1)'(v) * N_LEVELS) / (SCORE_W+LVL_W+1)'(mx);
    return (q >= N_LEVELS) ? LVL_W'(N_LEVELS - 1) : q[LVL_W-1:0];
  endfunction

  logic [SCORE_W-1:0]       mx_pen, mx_aff, aff_score;
  logic [SCORE_W+CNT_W-1:0] aff_full;
  logic [CNT_W+15:0]        rnd_full;
  logic [CNT_W-1:0]         rnd;
  logic                     l2_pass;

  always_comb begin
    aff_full  = (SCORE_W+CNT_W)'(miss_score) * (SCORE_W+CNT_W)'(act_cnt);
    aff_score = (aff_full > (SCORE_W+CNT_W)'({SCORE_W{1'b1}})) ? '1 : aff_full[SCORE_W-1:0];
    mx_pen    = (miss_score > max_pen) ? miss_score : max_pen;
    mx_aff    = (aff_score > max_aff) ? aff_score : max_aff;
    pen_lvl   = discretise(miss_score, mx_pen);
    aff_lvl   = discretise(aff_score, mx_aff);
    avg_lvl   = avg_lvl_q;
    l1_pass   = !enable || (pen_lvl > avg_lvl_q);
    l2_pass   = !enable || !victim_valid || (aff_lvl > victim_lvl);
    fill      = l1_pass && l2_pass;
    // uniform draw in [0, act_max)
    rnd_full  = (CNT_W+16)'(lfsr) * (CNT_W+16)'(act_max);
    rnd       = rnd_full[CNT_W+15:16];
    dec_victim = enable && l1_pass && victim_valid && !l2_pass &&
                 (victim_lvl != '0) && (rnd < act_cnt);
  end

  logic signed [AW:0] delta;
  assign delta = $signed({1'b0, AW'(hit_score) << FRAC}) - $signed({1'b0, avg_fx});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_pen   <= '0;
      max_aff   <= '0;
      avg_fx    <= '0;
      avg_lvl_q <= '0;
      upd_cnt   <= '0;
      lfsr      <= 16'hACE1;
    end else begin
      if (miss_commit) begin
        max_pen <= mx_pen;
        max_aff <= mx_aff;
        lfsr    <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      end
      if (hit_valid) begin
        avg_fx <= AW'($signed({1'b0, avg_fx}) + delta / AVG_DIV);
        if (hit_score > max_pen) max_pen <= hit_score;
        if (32'(upd_cnt) == F_UPDATE - 1) begin
          upd_cnt   <= '0;
          avg_lvl_q <= discretise(SCORE_W'(avg_fx >> FRAC),
                                  (hit_score > max_pen) ? hit_score : max_pen);
        end else begin
          upd_cnt <= upd_cnt + 1'b1;
        end
      end
    end
  end
endmodule

// warp_regroup: detects a memory-divergent warp of a fused SM and works out
// how to cut it into a fast and a slow half-warp.
//
// A fused warp has FUSED_WARP (64) threads, seen as NUM_GROUPS (8) groups of
// GROUP_SIZE (8) threads. From the scoreboard, `slow` marks every thread that
// is still waiting for a missed load. Each group's miss score is the number
// of its active slow threads; Si is the sum over the warp. When Si reaches
// MEM_THRESH the warp is memory-divergent (`mem_div`) and the regroup
// information is produced: with `regroup` = 1 the four groups with the
// highest scores (ties to the lower group index) form the slow half-warp
// (`slow_groups`), the other four the fast one; with `regroup` = 0 (direct
// split) the warp is cut in the middle, groups 4..7 being called slow.
//
// Timing: one registered stage; the result for a request appears on `out_*`
// in the cycle after `in_valid`, one warp per cycle.
//
// The scoring, the sum, the threshold test and the two cutting methods follow
// the paper's splitting algorithm. The group size, the threshold value and
// ranking groups by pairwise comparison are this design's own choices.
module warp_regroup
  import amoeba_pkg::*;
#(
  parameter int unsigned MEM_THRESH = 16   // Si needed to call a warp divergent
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    regroup,     // 1: warp regrouping, 0: direct split
  input  logic                    in_valid,
  input  logic [WID_W-1:0]        in_warp,
  input  logic [FUSED_WARP-1:0]   in_active,
  input  logic [FUSED_WARP-1:0]   in_slow,
  output logic                    out_valid,
  output logic [WID_W-1:0]        out_warp,
  output logic                    mem_div,
  output logic [6:0]              out_si,
  output logic [NUM_GROUPS-1:0]   slow_groups
);
  localparam int unsigned SCORE_W = $clog2(GROUP_SIZE + 1);

  logic [SCORE_W-1:0]  score [NUM_GROUPS];
  logic [6:0]          si;
  logic [NUM_GROUPS-1:0] rank_slow;

  always_comb begin
    si = '0;
    for (int g = 0; g < NUM_GROUPS; g++) begin
      score[g] = '0;
      for (int t = 0; t < GROUP_SIZE; t++)
        score[g] = score[g] + SCORE_W'(in_active[g*GROUP_SIZE+t] & in_slow[g*GROUP_SIZE+t]);
      si = si + 7'(score[g]);
    end
    // rank of group g = number of groups that come before it in slowness order
    for (int g = 0; g < NUM_GROUPS; g++) begin
      int unsigned rank;
      rank = 0;
      for (int h = 0; h < NUM_GROUPS; h++)
        if (h != g && (score[h] > score[g] || (score[h] == score[g] && h < g)))
          rank++;
      rank_slow[g] = (rank < NUM_GROUPS / 2);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_warp    <= '0;
      mem_div     <= 1'b0;
      out_si      <= '0;
      slow_groups <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_warp    <= in_warp;
        out_si      <= si;
        mem_div     <= (si >= 7'(MEM_THRESH));
        slow_groups <= regroup ? rank_slow
                               : {{(NUM_GROUPS/2){1'b1}}, {(NUM_GROUPS/2){1'b0}}};
      end
    end
  end
endmodule

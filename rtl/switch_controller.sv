// switch_controller: decides, for one fused SM pair, when to split it into two
// independent SMs and when to fuse it back (dynamic heterogeneity).
//
// While the pair runs fused it collects divergent warps: a warp labelled
// control-divergent at decode is entered in table Tc, a warp found
// memory-divergent from the scoreboard (warp_regroup) in table Tm, and each
// newly labelled warp is pushed into the divergent-warp bin. Every cycle the
// decision is computed: if the entries of Tc reach the threshold share of the
// running warps the pair splits; otherwise, if the entries of Tm reach it, the
// pair splits; otherwise it keeps executing fused. To split, every warp in the
// bin is moved to SM1 (one per cycle, `move_valid`), then `split` rises and
// the two SMs run on their own. When SM1 has finished all the divided warps
// the pair re-fuses, the tables are cleared and collection starts again.
// While split, the stalls of SM1 are checked every CHECK_PERIOD cycles; if SM1
// was stalled for more than half of the period, one fast warp still on SM0 is
// moved to it (`fast_valid`).
//
// When the kernel-level decision is scale-out (fuse_mode = 0) the pair simply
// stays split and nothing is collected.
//
// Timing: the decision is registered (one cycle), moves take one cycle per
// bin entry, re-fusion happens in the cycle after the last SM1 exit.
//
// Following the paper: the two tables, the ratio threshold, the order of the
// tests, moving the bin at split, re-fusing when SM1 finishes the divided
// warps, and the periodic fast-warp move. Own choices: the threshold value
// (SPLIT_NUM/SPLIT_DEN = 1/4), the period, the half-period stall criterion and
// the test ">=" (the flowchart prints ">=", the text says "greater than").
module switch_controller
  import amoeba_pkg::*;
#(
  parameter int unsigned NW           = WARPS_PER_SM,
  parameter int unsigned SPLIT_NUM    = 1,
  parameter int unsigned SPLIT_DEN    = 4,
  parameter int unsigned CHECK_PERIOD = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fuse_mode,
  // labels
  input  logic              dec_valid,       // a branch was decoded
  input  logic [WID_W-1:0]  dec_warp,
  input  logic              dec_ctrl_div,    // ... and it diverged
  input  logic              mem_valid,       // scoreboard lookup result
  input  logic [WID_W-1:0]  mem_warp,
  input  logic              mem_div,
  input  logic [NUM_GROUPS-1:0] mem_slow_groups,
  input  logic [NW-1:0]     warp_active,     // warps running in the pair
  // SM1 status while split
  input  logic              sm1_exit_valid,  // a warp finished on SM1
  input  logic [WID_W-1:0]  sm1_exit_warp,
  input  logic              sm1_stall,
  // divergent-warp bin
  output logic              q_push,
  output div_entry_t        q_data,
  output logic              q_pop,
  output logic              q_clear,
  input  div_entry_t        q_head,
  input  logic              q_empty,
  // results
  output logic              split,           // pair runs as two SMs
  output logic              move_valid,      // move q_head's warp to SM1
  output div_entry_t        move_entry,
  output logic              fast_valid,      // move a fast warp to SM1
  output logic [WID_W-1:0]  fast_warp,
  output logic [NW-1:0]     divided,         // warps that SM1 must finish
  output logic [$clog2(NW+1)-1:0] tc_count,
  output logic [$clog2(NW+1)-1:0] tm_count,
  output logic [15:0]       n_split_ctrl,    // splits caused by Tc
  output logic [15:0]       n_split_mem,     // splits caused by Tm
  output logic [15:0]       n_refuse,
  output logic [15:0]       n_fast_moves
);
  localparam int unsigned CW = $clog2(NW + 1);

  typedef enum logic [1:0] {W_OUT, W_FUSED, W_MOVE, W_SPLIT} wstate_e;
  wstate_e state;

  logic [NW-1:0] tc, tm, fast_moved;
  logic [CW-1:0] running;
  logic [$clog2(CHECK_PERIOD)-1:0] period_cnt;
  logic [$clog2(CHECK_PERIOD+1)-1:0] stall_cnt;

  always_comb begin
    tc_count = '0;
    tm_count = '0;
    running  = '0;
    for (int i = 0; i < NW; i++) begin
      tc_count = tc_count + CW'(tc[i]);
      tm_count = tm_count + CW'(tm[i]);
      running  = running  + CW'(warp_active[i]);
    end
  end

  // threshold tests: entries / running >= SPLIT_NUM / SPLIT_DEN
  logic tc_hit, tm_hit;
  assign tc_hit = (tc_count != '0) &&
                  (32'(tc_count) * SPLIT_DEN >= 32'(running) * SPLIT_NUM);
  assign tm_hit = (tm_count != '0) &&
                  (32'(tm_count) * SPLIT_DEN >= 32'(running) * SPLIT_NUM);

  // labelling: a warp enters the bin the first time it is labelled
  logic new_ctrl, new_mem;
  assign new_ctrl = (state == W_FUSED) && dec_valid && dec_ctrl_div &&
                    !tc[dec_warp] && !tm[dec_warp];
  assign new_mem  = (state == W_FUSED) && mem_valid && mem_div &&
                    !tm[mem_warp] && !tc[mem_warp] &&
                    !(new_ctrl && dec_warp == mem_warp);

  // one push per cycle: a control label wins, a memory label of the same
  // cycle is dropped and will be seen again on the warp's next lookup
  assign q_push = new_ctrl || new_mem;
  always_comb begin
    q_data = '0;
    if (new_ctrl) begin
      q_data.warp        = dec_warp;
      q_data.kind        = DIV_CTRL;
      q_data.slow_groups = {{(NUM_GROUPS/2){1'b1}}, {(NUM_GROUPS/2){1'b0}}};
    end else begin
      q_data.warp        = mem_warp;
      q_data.kind        = DIV_MEM;
      q_data.slow_groups = mem_slow_groups;
    end
  end

  assign q_pop      = (state == W_MOVE) && !q_empty;
  assign move_valid = q_pop;
  assign move_entry = q_head;
  assign q_clear    = (state == W_OUT);
  assign split      = (state == W_SPLIT) || (state == W_OUT);

  // lowest running warp that is neither divided nor already moved
  logic [NW-1:0] fast_cand;
  logic          fast_any;
  logic [WID_W-1:0] fast_sel;
  assign fast_cand = warp_active & ~divided & ~fast_moved;
  always_comb begin
    fast_any = 1'b0;
    fast_sel = '0;
    for (int i = NW - 1; i >= 0; i--)
      if (fast_cand[i]) begin
        fast_any = 1'b1;
        fast_sel = WID_W'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= W_OUT;
      tc           <= '0;
      tm           <= '0;
      divided      <= '0;
      fast_moved   <= '0;
      period_cnt   <= '0;
      stall_cnt    <= '0;
      fast_valid   <= 1'b0;
      fast_warp    <= '0;
      n_split_ctrl <= '0;
      n_split_mem  <= '0;
      n_refuse     <= '0;
      n_fast_moves <= '0;
    end else begin
      fast_valid <= 1'b0;
      if (!fuse_mode) begin
        state      <= W_OUT;
        tc         <= '0;
        tm         <= '0;
        divided    <= '0;
        fast_moved <= '0;
      end else begin
        unique case (state)
          W_OUT: state <= W_FUSED;
          W_FUSED: begin
            if (new_ctrl) tc[dec_warp] <= 1'b1;
            if (new_mem)  tm[mem_warp] <= 1'b1;
            if (tc_hit) begin
              state        <= W_MOVE;
              n_split_ctrl <= n_split_ctrl + 1'b1;
            end else if (tm_hit) begin
              state        <= W_MOVE;
              n_split_mem  <= n_split_mem + 1'b1;
            end
          end
          W_MOVE: begin
            if (q_pop) divided[q_head.warp] <= 1'b1;
            else begin
              state      <= W_SPLIT;   // bin empty: split starts
              period_cnt <= '0;
              stall_cnt  <= '0;
            end
          end
          W_SPLIT: begin
            if (sm1_exit_valid) divided[sm1_exit_warp] <= 1'b0;
            if (divided == '0 || (divided == (NW'(1) << sm1_exit_warp) && sm1_exit_valid)) begin
              // split end: re-fuse and collect again
              state      <= W_FUSED;
              tc         <= '0;
              tm         <= '0;
              divided    <= '0;
              fast_moved <= '0;
              n_refuse   <= n_refuse + 1'b1;
            end else begin
              period_cnt <= period_cnt + 1'b1;
              if (period_cnt == '1) begin
                stall_cnt <= '0;
                if (32'(stall_cnt) + 32'(sm1_stall) > CHECK_PERIOD / 2 && fast_any) begin
                  fast_valid   <= 1'b1;
                  fast_warp    <= fast_sel;
                  fast_moved[fast_sel] <= 1'b1;
                  n_fast_moves <= n_fast_moves + 1'b1;
                end
              end else begin
                stall_cnt <= stall_cnt + ($clog2(CHECK_PERIOD+1))'(sm1_stall);
              end
            end
          end
          default: state <= W_OUT;
        endcase
      end
    end
  end
endmodule

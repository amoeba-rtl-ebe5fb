// tb_switch_controller: exercises the split/fuse state machine of one SM pair
// together with a divergent-warp bin.
//   1. fuse_mode = 0: the pair stays split and collects nothing.
//   2. 16 running warps, control-divergent labels on warps 3, 5, 7 (below the
//      1/4 threshold), a memory label on 9, then a fourth control label (11):
//      4/16 meets the threshold, Tc is tested first, the five bin entries are
//      moved to SM1 in push order, one per cycle, and `split` rises on the
//      8th edge after the edge that took the deciding label.
//   3. While split, SM1 stalls all the time: within one check period a fast
//      warp (the lowest running warp that is not divided) is moved.
//   4. SM1 finishes the divided warps: the pair re-fuses on the edge after
//      the last exit.
//   5. Memory-divergent warps alone reach the threshold: split through Tm,
//      the entries carry the regroup masks; SM1 not stalled: no fast move.
//   6. A repeated label of the same warp is not pushed twice; 3 labels out
//      of 13 running warps do not split.
//   7. fuse_mode falling puts the pair back to scale-out immediately.
module tb_switch_controller;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              fuse_mode = 1'b0;
  logic              dec_valid = 1'b0, dec_ctrl_div = 1'b0;
  logic [WID_W-1:0]  dec_warp = '0;
  logic              mem_valid = 1'b0, mem_div = 1'b0;
  logic [WID_W-1:0]  mem_warp = '0;
  logic [NUM_GROUPS-1:0] mem_slow_groups = '0;
  logic [31:0]       warp_active = '0;
  logic              sm1_exit_valid = 1'b0, sm1_stall = 1'b0;
  logic [WID_W-1:0]  sm1_exit_warp = '0;
  logic              q_push, q_pop, q_clear, q_full, q_empty;
  div_entry_t        q_data, q_head;
  logic [5:0]        q_count;
  logic              split, move_valid, fast_valid;
  div_entry_t        move_entry;
  logic [WID_W-1:0]  fast_warp;
  logic [31:0]       divided;
  logic [5:0]        tc_count, tm_count;
  logic [15:0]       n_split_ctrl, n_split_mem, n_refuse, n_fast_moves;

  switch_controller dut (.*);

  divergent_warp_queue u_q (
    .clk, .rst_n, .clear(q_clear), .push(q_push), .push_data(q_data),
    .pop(q_pop), .head(q_head), .full(q_full), .empty(q_empty), .count(q_count)
  );

  int checks = 0, failures = 0;
  div_entry_t moved [$];
  int n_fast = 0;
  logic [WID_W-1:0] last_fast;

  always @(posedge clk) begin
    if (move_valid) moved.push_back(move_entry);
    if (fast_valid) begin n_fast++; last_fast = fast_warp; end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic label_ctrl(input int w);
    dec_valid = 1'b1; dec_ctrl_div = 1'b1; dec_warp = WID_W'(w);
    @(negedge clk);
    dec_valid = 1'b0; dec_ctrl_div = 1'b0;
  endtask

  task automatic label_mem(input int w, input logic [7:0] sg);
    mem_valid = 1'b1; mem_div = 1'b1; mem_warp = WID_W'(w); mem_slow_groups = sg;
    @(negedge clk);
    mem_valid = 1'b0; mem_div = 1'b0;
  endtask

  task automatic exit_warp(input int w);
    sm1_exit_valid = 1'b1; sm1_exit_warp = WID_W'(w);
    @(negedge clk);
    sm1_exit_valid = 1'b0;
  endtask

  initial begin
    int n;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 1. scale-out
    warp_active = 32'h0000FFFF;
    repeat (5) begin
      dec_valid = 1'b1; dec_ctrl_div = 1'b1; dec_warp = 5'd2;
      @(negedge clk);
      check(split == 1'b1 && !q_push, "scale-out pair must stay split and idle");
    end
    dec_valid = 1'b0; dec_ctrl_div = 1'b0;
    // 2. fused, control divergence
    fuse_mode = 1'b1;
    @(negedge clk);
    @(negedge clk);
    check(split == 1'b0, "fused pair not fused");
    label_ctrl(3); label_ctrl(5); label_ctrl(3); label_ctrl(7);
    label_mem(9, 8'h0F);
    repeat (3) @(negedge clk);
    check(split == 1'b0 && tc_count == 3 && tm_count == 1, "3/16 must not split");
    check(q_count == 4, $sformatf("bin holds %0d, expected 4 (no duplicate)", q_count));
    moved.delete();
    label_ctrl(11);
    n = 1;
    while (!split && n < 50) begin n++; @(negedge clk); end
    check(n == 8, $sformatf("split after %0d edges, expected 8", n));
    check(moved.size() == 5, $sformatf("%0d warps moved, expected 5", moved.size()));
    if (moved.size() == 5) begin
      check(moved[0].warp == 3 && moved[1].warp == 5 && moved[2].warp == 7 &&
            moved[3].warp == 9 && moved[4].warp == 11, "move order");
      check(moved[3].kind == DIV_MEM && moved[3].slow_groups == 8'h0F, "memory entry");
      check(moved[0].kind == DIV_CTRL && moved[0].slow_groups == 8'hF0, "control entry");
    end
    check(n_split_ctrl == 1 && n_split_mem == 0, "split counted as control");
    check(divided == 32'h00000AA8, $sformatf("divided %h", divided));
    // 3. stalled SM1 gets a fast warp
    sm1_stall = 1'b1;
    n = 0;
    while (n_fast == 0 && n < 400) begin n++; @(negedge clk); end
    check(n_fast == 1 && last_fast == 0, $sformatf("fast move %0d warp %0d", n_fast, last_fast));
    check(n <= 257, $sformatf("fast move after %0d cycles", n));
    sm1_stall = 1'b0;
    check(split == 1'b1, "still split after fast move");
    // 4. SM1 finishes the divided warps
    exit_warp(3); exit_warp(5); exit_warp(9); exit_warp(7);
    check(split == 1'b1, "re-fused before all divided warps exited");
    exit_warp(11);
    check(split == 1'b0, "not re-fused on the edge of the last exit");
    check(n_refuse == 1 && tc_count == 0 && tm_count == 0, "tables cleared at re-fusion");
    // 5. memory divergence: 1 control label, 4 memory labels
    moved.delete();
    n_fast = 0;
    label_ctrl(1);
    label_mem(2, 8'h33); label_mem(4, 8'hC3); label_mem(6, 8'h0F);
    check(split == 1'b0, "3 memory labels must not split");
    label_mem(8, 8'h3C);
    n = 1;
    while (!split && n < 50) begin n++; @(negedge clk); end
    check(n == 8, $sformatf("memory split after %0d edges, expected 8", n));
    check(n_split_mem == 1 && n_split_ctrl == 1, "split counted as memory");
    check(moved.size() == 5 && moved[1].kind == DIV_MEM && moved[1].slow_groups == 8'h33,
          "memory entries carry regroup masks");
    repeat (600) @(negedge clk);
    check(n_fast == 0, "fast move without stalls");
    exit_warp(1); exit_warp(2); exit_warp(4); exit_warp(6); exit_warp(8);
    check(split == 1'b0 && n_refuse == 2, "second re-fusion");
    // 6. 3 of 13 running warps
    warp_active = 32'h00001FFF;
    label_ctrl(0); label_ctrl(1); label_ctrl(2);
    repeat (4) @(negedge clk);
    check(split == 1'b0, "3/13 must not split");
    label_ctrl(3);   // 4/13 >= 1/4
    repeat (10) @(negedge clk);
    check(split == 1'b1 && n_split_ctrl == 2, "4/13 must split");
    // 7. kernel decision back to scale-out
    fuse_mode = 1'b0;
    @(negedge clk);
    check(split == 1'b1 && divided == '0 && tc_count == 0, "scale-out resets the pair");
    @(negedge clk);
    check(q_count == 0, "bin cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_amoeba_top: end-to-end run of the full-size fabric (48 SMs in 24 pairs,
// 8 memory controllers, default parameters) with a behavioural memory side:
// every load packet that reaches a memory controller port is answered, 20
// cycles later, by a refill into the L1 of the SM that sent it (SM0 of the
// pair while the pair is fused). Refill data is a pattern derived from the
// line address, so every L1 hit can be checked.
//
// Sequence:
//   kernel A: pair 0 runs uncoalesced loads while its first CTA is profiled
//     -> the predictor must fuse. While fused: fused loads (both halves of a
//     64-thread warp coalesced together, hits after refills), lockstep dual
//     issue, a control-divergence split with warp moves, a fast-warp move
//     and re-fusion on pair 2, a memory-divergence split with regrouping on
//     pair 3 and with a direct split on pair 4, SM1 of a split pair using
//     the shared fused L1, and the router bypass, seen as a shorter trip
//     from the bottom row of the mesh than in scale-out mode.
//   kernel B: coalesced load/store-heavy profile -> the predictor must keep
//     scale-out, and every pair must report split.
// The bench counts how often each mechanism happened and counts a failure
// for every mechanism that never did.
module tb_amoeba_top;
  import amoeba_pkg::*;

  localparam int NSM = NUM_SM;
  localparam int NP  = NSM / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                   kernel_start, kernel_done, cta_done, regroup;
  prof_events_t           prof_ev;
  logic                   fuse_mode, decision_valid;
  logic signed [ACC_W-1:0] logit;
  logic [WARPS_PER_SM-1:0] ready [NSM];
  logic                   dp_valid [NSM];
  logic [WID_W-1:0]       dp_warp [NSM];
  logic                   mem_valid [NSM], mem_ready [NSM], mem_store [NSM];
  logic [ADDR_W-1:0]      mem_addr [NSM][WARP_SIZE];
  logic [WARP_SIZE-1:0]   mem_active [NSM];
  logic                   l1_valid [NSM], l1_hit [NSM];
  logic [LINE_ADDR_W-1:0] l1_line [NSM];
  logic [LINE_BITS-1:0]   l1_data [NSM];
  logic                   fill_valid [NSM];
  logic [LINE_ADDR_W-1:0] fill_line [NSM];
  logic [LINE_BITS-1:0]   fill_data [NSM];
  logic [WARPS_PER_SM-1:0] warp_active [NP];
  logic                   dec_valid [NP], dec_ctrl_div [NP], mlk_valid [NP];
  logic [WID_W-1:0]       dec_warp [NP], mlk_warp [NP], sm1_exit_warp [NP], fast_warp [NP];
  logic [FUSED_WARP-1:0]  mlk_active [NP], mlk_slow [NP];
  logic                   sm1_exit_valid [NP], sm1_stall [NP];
  logic                   split [NP], move_valid [NP], fast_valid [NP];
  div_entry_t             move_entry [NP];
  logic [15:0]            n_split_ctrl [NP], n_split_mem [NP], n_refuse [NP], n_fast_moves [NP];
  logic                   mc_valid [NUM_MC], mc_ready [NUM_MC];
  flit_t                  mc_flit [NUM_MC];

  amoeba_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  function automatic logic [LINE_BITS-1:0] pattern(input logic [LINE_ADDR_W-1:0] l);
    return {32{7'h5A, l}};
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_fuse_dec = 0, n_out_dec = 0, n_hit = 0, n_miss = 0, n_fused_hit = 0;
  int n_lockstep = 0, n_moves = 0, n_fast = 0, n_regroup_mask = 0, n_direct_mask = 0;
  int n_split_l1 = 0, n_fill = 0, n_mc_pkt = 0, n_bypass_gain = 0, n_merged = 0;

  always @(posedge clk) if (rst_n) begin
    if (decision_valid && fuse_mode)  n_fuse_dec++;
    if (decision_valid && !fuse_mode) n_out_dec++;
    for (int s = 0; s < NSM; s++)
      if (l1_valid[s]) begin
        if (l1_hit[s]) begin
          n_hit++;
          check(l1_data[s] == pattern(l1_line[s]), $sformatf("SM %0d hit data", s));
          if (fuse_mode && !split[s / 2]) n_fused_hit++;
        end else n_miss++;
      end
    for (int p = 0; p < NP; p++) begin
      if (fuse_mode && !split[p] && dp_valid[2*p]) begin
        check(dp_valid[2*p+1] && dp_warp[2*p+1] == dp_warp[2*p], "fused lockstep issue");
        n_lockstep++;
      end
      if (move_valid[p]) begin
        n_moves++;
        if (move_entry[p].kind == DIV_MEM && move_entry[p].slow_groups != 8'hF0) n_regroup_mask++;
        if (move_entry[p].kind == DIV_MEM && move_entry[p].slow_groups == 8'hF0) n_direct_mask++;
      end
      if (fast_valid[p]) n_fast++;
    end
  end

  // ------------------------------------------------------------ memory side
  typedef struct { longint due; int sm; logic [LINE_ADDR_W-1:0] line; } fill_t;
  fill_t  fills [$];
  longint mc_seen [logic [LINE_ADDR_W-1:0]];   // arrival time per line

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NUM_MC; m++)
      if (mc_valid[m] && mc_ready[m]) begin
        fill_t f;
        int p, k;
        n_mc_pkt++;
        check(int'(mc_flit[m].line % NUM_MC) == m, "packet reached the wrong memory controller");
        mc_seen[mc_flit[m].line] = cyc;
        if (mc_flit[m].kind == PKT_LOAD) begin
          p = int'(mc_flit[m].src_x) + MESH_X * ((int'(mc_flit[m].src_y) - 1) / 2);
          k = (int'(mc_flit[m].src_y) - 1) % 2;
          f.due = cyc + 20; f.sm = 2 * p + k; f.line = mc_flit[m].line;
          fills.push_back(f);
        end
      end
  end

  // one refill per SM per cycle, driven between edges
  always @(negedge clk) begin
    bit busy [NSM];
    for (int s = 0; s < NSM; s++) begin fill_valid[s] = 1'b0; busy[s] = 1'b0; end
    for (int i = 0; i < fills.size(); i++)
      if (fills[i].due <= cyc && !busy[fills[i].sm]) begin
        busy[fills[i].sm]      = 1'b1;
        fill_valid[fills[i].sm] = 1'b1;
        fill_line[fills[i].sm]  = fills[i].line;
        fill_data[fills[i].sm]  = pattern(fills[i].line);
        fills.delete(i);
        i--;
        n_fill++;
      end
  end

  // ------------------------------------------------------------ drivers
  // one memory instruction on SM s (both SMs of the pair when `both`)
  task automatic mem_op(input int s, input bit both, input logic [ADDR_W-1:0] base,
                        input int stride, input bit st);
    bit took;
    for (int k = 0; k < (both ? 2 : 1); k++) begin
      for (int i = 0; i < WARP_SIZE; i++)
        mem_addr[s + k][i] = base + ADDR_W'((both ? (k * WARP_SIZE + i) : i) * stride);
      mem_active[s + k] = '1;
      mem_store[s + k]  = st;
      mem_valid[s + k]  = 1'b1;
    end
    do begin
      took = mem_ready[s];
      @(negedge clk);
    end while (!took);
    mem_valid[s] = 1'b0;
    if (both) mem_valid[s + 1] = 1'b0;
  endtask

  // latency from the L1 miss of `line` on SM s to its arrival at the controller
  task automatic probe(input int s, input logic [LINE_ADDR_W-1:0] line, output int lat);
    longint t0;
    mc_seen.delete(line);
    for (int i = 0; i < WARP_SIZE; i++) mem_addr[s][i] = {line, 7'd0};
    mem_active[s] = 32'h1;
    mem_store[s]  = 1'b0;
    mem_valid[s]  = 1'b1;
    // a fused SM takes the instruction from both datapaths (SM1's half idle)
    mem_active[s + 1] = '0;
    mem_store[s + 1]  = 1'b0;
    mem_valid[s + 1]  = fuse_mode;
    t0 = -1;
    for (int n = 0; n < 200 && !mc_seen.exists(line); n++) begin
      @(negedge clk);       // the idle coalescer takes it at the first edge
      mem_valid[s]     = 1'b0;
      mem_valid[s + 1] = 1'b0;
      if (l1_valid[s] && !l1_hit[s] && l1_line[s] == line && t0 < 0) t0 = cyc;
    end
    lat = mc_seen.exists(line) && t0 >= 0 ? int'(mc_seen[line] - t0) : -1;
  endtask

  task automatic run_profile(input bit scale_up);
    @(negedge clk) kernel_start = 1'b1;
    @(negedge clk) kernel_start = 1'b0;
    check(fuse_mode == 1'b0, "kernel did not start scale-out");
    fork
      begin
        for (int i = 0; i < 40; i++) begin
          if (scale_up) mem_op(0, 1'b0, 32'h2000_0000 + 32'(i) * 32'h10_0000, 128, 1'b0); // one line per lane
          else          mem_op(0, 1'b0, 32'h3000_0000 + 32'(i) * 128, 4, 1'b0);          // one line per warp
          repeat (2) @(negedge clk);
        end
      end
      begin
        for (int c = 0; c < 600; c++) begin
          prof_ev = '0;
          prof_ev.inst       = 2'd1;
          prof_ev.cta_active = 4'd6;
          prof_ev.ld_inst    = scale_up ? (c % 8 == 0) : 1'b1;
          prof_ev.st_inst    = scale_up ? 1'b0 : (c % 2 == 0);
          prof_ev.noc_pkt    = (c % 4 == 0);
          prof_ev.noc_lat    = 16'd24;
          @(negedge clk);
        end
        prof_ev = '0;
      end
    join
    cta_done = 1'b1;
    @(negedge clk) cta_done = 1'b0;
    for (int n = 0; n < 600 && !decision_valid; n++) @(negedge clk);
    @(negedge clk);
    check(fuse_mode == scale_up, $sformatf("kernel decision fuse_mode=%0b logit=%0d", fuse_mode, logit));
  endtask

  task automatic label_ctrl(input int p, input int w);
    dec_valid[p] = 1'b1; dec_ctrl_div[p] = 1'b1; dec_warp[p] = WID_W'(w);
    @(negedge clk);
    dec_valid[p] = 1'b0; dec_ctrl_div[p] = 1'b0;
  endtask

  task automatic label_mem(input int p, input int w);
    mlk_valid[p]  = 1'b1; mlk_warp[p] = WID_W'(w);
    mlk_active[p] = '1;
    mlk_slow[p]   = {8'hFF, 8'h00, 8'hFF, 8'h00, 8'h0F, 8'h00, 8'hF0, 8'h00}; // groups 1,3,5,7 slow
    @(negedge clk);
    mlk_valid[p] = 1'b0;
  endtask

  task automatic exit_sm1(input int p, input int w);
    sm1_exit_valid[p] = 1'b1; sm1_exit_warp[p] = WID_W'(w);
    @(negedge clk);
    sm1_exit_valid[p] = 1'b0;
  endtask

  initial begin
    int lat_out, lat_fused, hits0, misses0;
    kernel_start = 0; kernel_done = 0; cta_done = 0; regroup = 1; prof_ev = '0;
    for (int s = 0; s < NSM; s++) begin
      ready[s] = '0; mem_valid[s] = 0; mem_store[s] = 0; mem_active[s] = '0;
      fill_valid[s] = 0; fill_line[s] = '0; fill_data[s] = '0;
      for (int i = 0; i < WARP_SIZE; i++) mem_addr[s][i] = '0;
    end
    for (int p = 0; p < NP; p++) begin
      warp_active[p] = 32'h0000FFFF;
      dec_valid[p] = 0; dec_ctrl_div[p] = 0; dec_warp[p] = '0;
      mlk_valid[p] = 0; mlk_warp[p] = '0; mlk_active[p] = '0; mlk_slow[p] = '0;
      sm1_exit_valid[p] = 0; sm1_exit_warp[p] = '0; sm1_stall[p] = 0;
    end
    for (int m = 0; m < NUM_MC; m++) mc_ready[m] = 1'b1;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // ---------------- kernel A: scale-out while profiling, then fused
    probe(32, 25'h0ABC00, lat_out);            // pair 16 SM0: bottom rows of the mesh
    run_profile(1'b1);
    for (int p = 0; p < NP; p++) check(split[p] == 1'b0, $sformatf("pair %0d not fused", p));
    repeat (5) @(negedge clk);
    probe(32, 25'h0ABC08, lat_fused);
    check(lat_out > 0 && lat_fused > 0, "latency probes did not complete");
    // two SM1 routers (rows 4 and 2) are bypassed on the way from row 5
    check(lat_fused == lat_out - 2, $sformatf("trip %0d cycles fused, %0d scale-out", lat_fused, lat_out));
    if (lat_fused < lat_out) n_bypass_gain++;

    // fused loads on pair 1: halves touch the same lines (stride 0 per half)
    misses0 = n_miss;
    mem_op(2, 1'b1, 32'h4000_0000, 4, 1'b0);   // 64 lanes x 4 B = 2 lines
    repeat (60) @(negedge clk);
    check(n_miss - misses0 == 2, $sformatf("fused 64-lane access made %0d requests, expected 2", n_miss - misses0));
    if (n_miss - misses0 == 2) n_merged++;
    hits0 = n_fused_hit;
    mem_op(2, 1'b1, 32'h4000_0000, 4, 1'b0);
    repeat (10) @(negedge clk);
    check(n_fused_hit - hits0 == 2, "fused re-access did not hit");
    // lockstep issue on all pairs
    for (int s = 0; s < NSM; s++) ready[s] = 32'h0000_00F0;
    repeat (10) @(negedge clk);
    for (int s = 0; s < NSM; s++) ready[s] = '0;

    // control-divergence split on pair 2, fast move, SM1 on the shared L1
    label_ctrl(2, 1); label_ctrl(2, 2); label_ctrl(2, 3); label_ctrl(2, 4);
    repeat (10) @(negedge clk);
    check(split[2] == 1'b1 && n_split_ctrl[2] == 1, "pair 2 did not split on control divergence");
    begin
      int n_before;
      n_before = n_hit + n_miss;
      mem_op(5, 1'b0, 32'h5000_0000, 4, 1'b0);   // SM1 of pair 2 while split
      repeat (40) @(negedge clk);
      mem_op(5, 1'b0, 32'h5000_0000, 4, 1'b0);
      repeat (10) @(negedge clk);
      if (n_hit + n_miss - n_before == 2) n_split_l1++;
      check(n_hit + n_miss - n_before == 2, "split SM1 access through the shared L1");
    end
    sm1_stall[2] = 1'b1;
    repeat (300) @(negedge clk);
    sm1_stall[2] = 1'b0;
    check(n_fast_moves[2] == 1, "no fast warp moved to the stalled SM1");
    exit_sm1(2, 1); exit_sm1(2, 2); exit_sm1(2, 3); exit_sm1(2, 4);
    @(negedge clk);
    check(split[2] == 1'b0 && n_refuse[2] == 1, "pair 2 did not re-fuse");

    // memory-divergence splits: pair 3 with regrouping, pair 4 direct split
    for (int w = 0; w < 4; w++) label_mem(3, 8 + w);
    repeat (12) @(negedge clk);
    check(split[3] == 1'b1 && n_split_mem[3] == 1, "pair 3 did not split on memory divergence");
    regroup = 1'b0;
    for (int w = 0; w < 4; w++) label_mem(4, 8 + w);
    repeat (12) @(negedge clk);
    regroup = 1'b1;
    check(split[4] == 1'b1 && n_split_mem[4] == 1, "pair 4 did not split on memory divergence");
    for (int w = 0; w < 4; w++) begin exit_sm1(3, 8 + w); exit_sm1(4, 8 + w); end
    @(negedge clk);
    check(split[3] == 1'b0 && split[4] == 1'b0, "pairs 3/4 did not re-fuse");
    for (int p = 5; p < NP; p++) check(split[p] == 1'b0 && n_split_ctrl[p] == 0, "untouched pair changed");
    kernel_done = 1'b1;
    @(negedge clk) kernel_done = 1'b0;

    // ---------------- kernel B: scale-out
    run_profile(1'b0);
    for (int p = 0; p < NP; p++) check(split[p] == 1'b1, $sformatf("pair %0d not scale-out", p));
    repeat (100) @(negedge clk);
    check(fills.size() == 0, "refills left over");

    // ---------------- mechanism coverage
    check(n_fuse_dec > 0,     "mechanism never seen: scale-up decision");
    check(n_out_dec > 0,      "mechanism never seen: scale-out decision");
    check(n_hit > 0,          "mechanism never seen: L1 hit");
    check(n_miss > 0,         "mechanism never seen: L1 miss");
    check(n_fused_hit > 0,    "mechanism never seen: hit in the fused L1");
    check(n_merged > 0,       "mechanism never seen: fused coalescing");
    check(n_lockstep > 0,     "mechanism never seen: fused dual issue");
    check(n_moves > 0,        "mechanism never seen: warp moved at split");
    check(n_fast > 0,         "mechanism never seen: fast warp move");
    check(n_regroup_mask > 0, "mechanism never seen: warp regrouping");
    check(n_direct_mask > 0,  "mechanism never seen: direct split");
    check(n_split_l1 > 0,     "mechanism never seen: split SM1 on the shared L1");
    check(n_fill > 0 && n_mc_pkt > 0, "mechanism never seen: memory traffic");
    check(n_bypass_gain > 0,  "mechanism never seen: router bypass");
    $display("mechanisms: fuse=%0d out=%0d hit=%0d miss=%0d fused_hit=%0d merged=%0d lockstep=%0d moves=%0d fast=%0d regroup=%0d direct=%0d split_l1=%0d pkts=%0d bypass=%0d",
             n_fuse_dec, n_out_dec, n_hit, n_miss, n_fused_hit, n_merged, n_lockstep, n_moves,
             n_fast, n_regroup_mask, n_direct_mask, n_split_l1, n_mc_pkt, n_bypass_gain);
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

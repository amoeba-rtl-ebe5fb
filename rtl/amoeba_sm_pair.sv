// amoeba_sm_pair: two neighbouring scale-out SMs (SM0 and SM1) with the
// structures that let them run as one scale-up SM.
//
// Three modes:
//  * scale-out (fuse_mode = 0): the two SMs are independent. Each has its own
//    warp issue, coalescing unit, L1 bank and network interface.
//  * fused (fuse_mode = 1, not split): one SM with 64-thread warps. SM0's
//    warp scheduler issues each warp to both datapaths, the two coalescing
//    units act as one, the L1 banks form one cache of twice the
//    associativity, and all memory traffic leaves through SM0's network
//    interface while SM1's router is bypassed (`router_bypass`).
//  * dynamically split (fuse_mode = 1, split): the switch controller has moved
//    the divergent warps to SM1, so the two SMs issue independently and
//    coalesce their own instructions, but the shared resources stay fused:
//    the fused L1 (both coalescing units take turns on its single port) and
//    the single network interface.
//
// The switch controller collects divergent warps from the decode labels
// (dec_*) and from the scoreboard lookups (mlk_*), which warp_regroup scores;
// collected warps wait in the divergent-warp queue until the pair splits.
//
// Memory requests: a coalesced request looks up the L1; a load miss and every
// store become a single-flit packet to the memory controller that owns the
// line (controller = line address mod NUM_MC, in mesh row 0). Each network
// interface has a small injection FIFO; the coalescers are held while it
// cannot absorb the requests already in the L1 pipeline.
//
// Following the paper: what is fused, what SM1 loses when fused, the split
// that keeps L1 and network interface shared, the bin and the tables. Own
// choices: the address-to-controller mapping, NI_DEPTH (a power of two), the write-through stores, the
// round-robin sharing of the fused L1 port while split, and the FIFO sizes.
module amoeba_sm_pair
  import amoeba_pkg::*;
#(
  parameter int unsigned NI_DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [COORD_W-1:0]     pos_x,          // mesh column of the pair
  input  logic [COORD_W-1:0]     pos_y0,         // mesh row of SM0 (SM1 is the next row)
  input  logic                   fuse_mode,
  input  logic                   regroup,        // 1: warp regrouping, 0: direct split
  // scoreboards / I-buffers
  input  logic [WARPS_PER_SM-1:0] ready  [2],
  input  logic [WARPS_PER_SM-1:0] warp_active,
  output logic [1:0]             dp_valid,
  output logic [WID_W-1:0]       dp_warp [2],
  output logic                   dp1_from_sm0,
  // divergence labels
  input  logic                   dec_valid,
  input  logic [WID_W-1:0]       dec_warp,
  input  logic                   dec_ctrl_div,
  input  logic                   mlk_valid,
  input  logic [WID_W-1:0]       mlk_warp,
  input  logic [FUSED_WARP-1:0]  mlk_active,
  input  logic [FUSED_WARP-1:0]  mlk_slow,
  input  logic                   sm1_exit_valid,
  input  logic [WID_W-1:0]       sm1_exit_warp,
  input  logic                   sm1_stall,
  output logic                   split,
  output logic                   move_valid,
  output div_entry_t             move_entry,
  output logic                   fast_valid,
  output logic [WID_W-1:0]       fast_warp,
  output logic [15:0]            n_split_ctrl,
  output logic [15:0]            n_split_mem,
  output logic [15:0]            n_refuse,
  output logic [15:0]            n_fast_moves,
  // memory instructions from the two datapaths
  input  logic [1:0]             mem_valid,
  output logic [1:0]             mem_ready,
  input  logic [ADDR_W-1:0]      mem_addr   [2][WARP_SIZE],
  input  logic [WARP_SIZE-1:0]   mem_active [2],
  input  logic [1:0]             mem_store,
  // L1 answers and refills
  output logic [1:0]             l1_valid,
  output logic [1:0]             l1_hit,
  output logic [LINE_ADDR_W-1:0] l1_line [2],
  output logic [LINE_BITS-1:0]   l1_data [2],
  input  logic [1:0]             fill_valid,
  input  logic [LINE_ADDR_W-1:0] fill_line [2],
  input  logic [LINE_BITS-1:0]   fill_data [2],
  // network interfaces (to the local ports of the SMs' routers)
  output logic [1:0]             ni_valid,
  input  logic [1:0]             ni_ready,
  output flit_t                  ni_flit [2],
  output logic                   router_bypass,  // SM1's router disabled
  // event counts of the pair for the profiler
  output logic [6:0]             ev_thread_acc,
  output logic [1:0]             ev_mem_actual,
  output logic [1:0]             ev_l1d_acc,
  output logic [1:0]             ev_l1d_miss
);
  logic pair_fused;            // the datapaths run as one SM
  assign pair_fused    = fuse_mode && !split;
  assign router_bypass = fuse_mode;

  // ------------------------------------------------ divergence handling
  logic        rg_valid, rg_div;
  logic [WID_W-1:0] rg_warp;
  logic [6:0]  rg_si;
  logic [NUM_GROUPS-1:0] rg_slow;

  warp_regroup u_regroup (
    .clk, .rst_n, .regroup,
    .in_valid(mlk_valid), .in_warp(mlk_warp), .in_active(mlk_active), .in_slow(mlk_slow),
    .out_valid(rg_valid), .out_warp(rg_warp), .mem_div(rg_div), .out_si(rg_si),
    .slow_groups(rg_slow)
  );

  logic       q_push, q_pop, q_clear, q_full, q_empty;
  div_entry_t q_data, q_head;
  logic [$clog2(WARPS_PER_SM+1)-1:0] q_count;
  logic [WARPS_PER_SM-1:0] divided;
  logic [$clog2(WARPS_PER_SM+1)-1:0] tc_count, tm_count;

  divergent_warp_queue u_bin (
    .clk, .rst_n, .clear(q_clear), .push(q_push), .push_data(q_data),
    .pop(q_pop), .head(q_head), .full(q_full), .empty(q_empty), .count(q_count)
  );

  switch_controller u_switch (
    .clk, .rst_n, .fuse_mode,
    .dec_valid, .dec_warp, .dec_ctrl_div,
    .mem_valid(rg_valid), .mem_warp(rg_warp), .mem_div(rg_div), .mem_slow_groups(rg_slow),
    .warp_active,
    .sm1_exit_valid, .sm1_exit_warp, .sm1_stall,
    .q_push, .q_data, .q_pop, .q_clear, .q_head, .q_empty,
    .split, .move_valid, .move_entry, .fast_valid, .fast_warp, .divided,
    .tc_count, .tm_count, .n_split_ctrl, .n_split_mem, .n_refuse, .n_fast_moves
  );

  // ------------------------------------------------ issue
  fused_issue u_issue (
    .clk, .rst_n, .fused(pair_fused),
    .ready0(ready[0]), .ready1(ready[1]),
    .dp0_valid(dp_valid[0]), .dp0_warp(dp_warp[0]),
    .dp1_valid(dp_valid[1]), .dp1_warp(dp_warp[1]),
    .dp1_from_sm0
  );

  // ------------------------------------------------ coalescing
  logic [1:0]             co_valid, co_ready, co_store, co_last;
  logic [LINE_ADDR_W-1:0] co_line [2];
  logic [FUSED_WARP-1:0]  co_mask [2];
  logic [1:0]             co_req_count;

  fused_coalescer u_coal (
    .clk, .rst_n, .fused(pair_fused),
    .in_valid(mem_valid), .in_ready(mem_ready), .in_addr(mem_addr),
    .in_active(mem_active), .in_store(mem_store),
    .out_valid(co_valid), .out_ready(co_ready), .out_line(co_line),
    .out_mask(co_mask), .out_store(co_store), .out_last(co_last),
    .thread_acc(ev_thread_acc), .req_count(co_req_count)
  );

  // ------------------------------------------------ L1 access
  // Injection FIFO room decides whether requests may enter the L1 pipeline
  // (at most two requests per port are in flight in it).
  logic [$clog2(NI_DEPTH+1)-1:0] ni_cnt [2];
  logic [1:0] ni_room;
  always_comb
    for (int p = 0; p < 2; p++) ni_room[p] = (32'(ni_cnt[p]) + 3 <= NI_DEPTH);

  logic [1:0]             l1_req_valid, l1_req_store;
  logic [LINE_ADDR_W-1:0] l1_req_line [2];
  logic                   turn;            // round-robin when split but L1 fused
  always_comb begin
    co_ready     = '0;
    l1_req_valid = '0;
    l1_req_store = '0;
    l1_req_line  = co_line;
    if (!fuse_mode) begin
      co_ready     = ni_room;
      l1_req_valid = co_valid & ni_room;
      l1_req_store = co_store;
    end else if (pair_fused) begin
      co_ready[0]     = ni_room[0];
      l1_req_valid[0] = co_valid[0] && ni_room[0];
      l1_req_store[0] = co_store[0];
    end else begin
      // split SMs share the fused L1 port
      if (ni_room[0]) begin
        if (co_valid[1] && (turn || !co_valid[0])) begin
          co_ready[1]     = 1'b1;
          l1_req_valid[0] = 1'b1;
          l1_req_line[0]  = co_line[1];
          l1_req_store[0] = co_store[1];
        end else if (co_valid[0]) begin
          co_ready[0]     = 1'b1;
          l1_req_valid[0] = 1'b1;
          l1_req_store[0] = co_store[0];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) turn <= 1'b0;
    else if (l1_req_valid[0]) turn <= !co_ready[1];
  end

  logic [1:0] l1_store;
  fused_l1_cache u_l1 (
    .clk, .rst_n, .fused(fuse_mode),
    .req_valid(l1_req_valid), .req_line(l1_req_line), .req_store(l1_req_store),
    .resp_valid(l1_valid), .resp_hit(l1_hit), .resp_store(l1_store),
    .resp_line(l1_line), .resp_data(l1_data),
    .fill_valid, .fill_line, .fill_data
  );

  // ------------------------------------------------ network interfaces
  flit_t      ni_fifo [2][NI_DEPTH];
  logic [$clog2(NI_DEPTH)-1:0] ni_rd [2], ni_wr [2];
  logic [1:0] ni_push, ni_pop;

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      ni_push[p]  = l1_valid[p] && (l1_store[p] || !l1_hit[p]);
      ni_valid[p] = (ni_cnt[p] != '0);
      ni_pop[p]   = ni_valid[p] && ni_ready[p];
      ni_flit[p]  = ni_fifo[p][ni_rd[p]];
    end
  end

  function automatic flit_t make_flit(logic [LINE_ADDR_W-1:0] line, logic store, logic [COORD_W-1:0] src_y);
    flit_t f;
    f       = '0;
    f.dst_x = COORD_W'(line % NUM_MC);
    f.dst_y = '0;
    f.src_x = pos_x;
    f.src_y = src_y;
    f.kind  = store ? PKT_STORE : PKT_LOAD;
    f.line  = line;
    return f;
  endfunction

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++)
      if (ni_push[p])
        ni_fifo[p][ni_wr[p]] <= make_flit(l1_line[p], l1_store[p], pos_y0 + COORD_W'(p));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        ni_rd[p]  <= '0;
        ni_wr[p]  <= '0;
        ni_cnt[p] <= '0;
      end
    end else begin
      for (int p = 0; p < 2; p++) begin
        if (ni_push[p]) ni_wr[p] <= ni_wr[p] + 1'b1;
        if (ni_pop[p])  ni_rd[p] <= ni_rd[p] + 1'b1;
        ni_cnt[p] <= ni_cnt[p] + ($clog2(NI_DEPTH+1))'(ni_push[p])
                               - ($clog2(NI_DEPTH+1))'(ni_pop[p]);
      end
    end
  end

  // ------------------------------------------------ profiler events
  assign ev_mem_actual = co_req_count;
  assign ev_l1d_acc    = 2'(l1_valid[0] && !l1_store[0]) + 2'(l1_valid[1] && !l1_store[1]);
  assign ev_l1d_miss   = 2'(l1_valid[0] && !l1_store[0] && !l1_hit[0])
                       + 2'(l1_valid[1] && !l1_store[1] && !l1_hit[1]);

  // a fused pair uses one network interface only
  assert property (@(posedge clk) disable iff (!rst_n) fuse_mode |-> !ni_push[1]);
endmodule

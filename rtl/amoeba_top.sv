// amoeba_top: the reconfigurable GPU fabric: NUM_SM scale-out SMs grouped in
// NUM_SM/2 fusable pairs, the online reconfiguration controller, and the
// request mesh that carries L1 misses and stores to the memory controllers.
//
// Kernel level: for every new kernel the reconfiguration controller profiles
// the first CTA on pair 0 (which runs scale-out meanwhile), evaluates the
// scalability model and broadcasts `fuse_mode` to every pair. The L1, issue
// and coalescing events of the profile come from pair 0 itself; the events
// that live in the SM pipeline (instruction mix, control stalls, L1I/L1C,
// MSHR, NoC latency, resident CTAs) come in on `prof_ev`.
//
// Pair level: each pair splits and re-fuses on its own (amoeba_sm_pair), so
// fused and split pairs coexist.
//
// Network: a MESH_X x MESH_Y mesh of noc_router with Y-first routing. Row 0
// holds the NUM_MC memory controllers (their local ports are the mc_* ports
// of this module); pair p sits in column p mod MESH_X, its SM0 in row
// 1 + 2*(p / MESH_X) and its SM1 in the row below. While fused, every SM1
// router is bypassed, so a request from the bottom of a column passes half of
// the routers in one cycle instead of two. Replies and refills (the second
// subnet, the L2 slices and the memory controllers) are outside this module:
// refills enter on fill_*.
//
// The SM pipelines themselves (fetch, decode, register files, SP/SFU,
// scoreboards) are not part of this RTL: their signals are ports, indexed by
// SM number s = 2*p + k for SM k of pair p.
//
// Following the paper: 48 SMs fused in neighbouring pairs, 8 memory
// controllers, a mesh with 2-stage routers and 128-bit channels, the router
// bypass, the per-kernel decision and the per-pair split/fuse. Own choices:
// the floorplan (memory controllers on one edge, pairs stacked vertically),
// profiling on pair 0, and leaving the reply subnet out.
module amoeba_top
  import amoeba_pkg::*;
#(
  parameter int unsigned NSM = NUM_SM
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // kernel dispatch
  input  logic                   kernel_start,
  input  logic                   kernel_done,
  input  logic                   cta_done,        // first CTA on pair 0 finished
  input  prof_events_t           prof_ev,
  input  logic                   regroup,         // 1: warp regrouping, 0: direct split
  output logic                   fuse_mode,
  output logic                   decision_valid,
  output logic signed [ACC_W-1:0] logit,
  // per SM pipeline signals
  input  logic [WARPS_PER_SM-1:0] ready       [NSM],
  output logic                   dp_valid     [NSM],
  output logic [WID_W-1:0]       dp_warp      [NSM],
  input  logic                   mem_valid    [NSM],
  output logic                   mem_ready    [NSM],
  input  logic [ADDR_W-1:0]      mem_addr     [NSM][WARP_SIZE],
  input  logic [WARP_SIZE-1:0]   mem_active   [NSM],
  input  logic                   mem_store    [NSM],
  output logic                   l1_valid     [NSM],
  output logic                   l1_hit       [NSM],
  output logic [LINE_ADDR_W-1:0] l1_line      [NSM],
  output logic [LINE_BITS-1:0]   l1_data      [NSM],
  input  logic                   fill_valid   [NSM],
  input  logic [LINE_ADDR_W-1:0] fill_line    [NSM],
  input  logic [LINE_BITS-1:0]   fill_data    [NSM],
  // per pair divergence signals
  input  logic [WARPS_PER_SM-1:0] warp_active [NSM/2],
  input  logic                   dec_valid    [NSM/2],
  input  logic [WID_W-1:0]       dec_warp     [NSM/2],
  input  logic                   dec_ctrl_div [NSM/2],
  input  logic                   mlk_valid    [NSM/2],
  input  logic [WID_W-1:0]       mlk_warp     [NSM/2],
  input  logic [FUSED_WARP-1:0]  mlk_active   [NSM/2],
  input  logic [FUSED_WARP-1:0]  mlk_slow     [NSM/2],
  input  logic                   sm1_exit_valid [NSM/2],
  input  logic [WID_W-1:0]       sm1_exit_warp  [NSM/2],
  input  logic                   sm1_stall    [NSM/2],
  output logic                   split        [NSM/2],
  output logic                   move_valid   [NSM/2],
  output div_entry_t             move_entry   [NSM/2],
  output logic                   fast_valid   [NSM/2],
  output logic [WID_W-1:0]       fast_warp    [NSM/2],
  output logic [15:0]            n_split_ctrl [NSM/2],
  output logic [15:0]            n_split_mem  [NSM/2],
  output logic [15:0]            n_refuse     [NSM/2],
  output logic [15:0]            n_fast_moves [NSM/2],
  // memory controller ends of the request mesh
  output logic                   mc_valid     [NUM_MC],
  input  logic                   mc_ready     [NUM_MC],
  output flit_t                  mc_flit      [NUM_MC]
);
  localparam int unsigned NP   = NSM / 2;
  localparam int unsigned MX   = MESH_X;
  localparam int unsigned MY   = 1 + 2 * ((NP + MX - 1) / MX);

  // ------------------------------------------------------------ controller
  prof_events_t ev;
  logic         reconfig, profiling;
  metric_t      metrics [NUM_METRICS];
  logic [6:0]   p_thread_acc [NP];
  logic [1:0]   p_mem_actual [NP];
  logic [1:0]   p_l1d_acc    [NP];
  logic [1:0]   p_l1d_miss   [NP];

  always_comb begin
    ev            = prof_ev;
    ev.mem_thread = p_thread_acc[0];
    ev.mem_actual = p_mem_actual[0];
    ev.l1d_acc    = p_l1d_acc[0];
    ev.l1d_miss   = p_l1d_miss[0];
  end

  reconfig_controller u_ctrl (
    .clk, .rst_n, .kernel_start, .kernel_done, .cta_done, .ev,
    .fuse_mode, .reconfig, .decision_valid, .profiling, .logit, .metrics
  );

  // ------------------------------------------------------------ mesh wiring
  // link[x][y][port]: flit leaving router (x,y) through that port
  logic  r_in_valid  [MX][MY][NUM_PORTS];
  logic  r_in_ready  [MX][MY][NUM_PORTS];
  flit_t r_in_flit   [MX][MY][NUM_PORTS];
  logic  r_out_valid [MX][MY][NUM_PORTS];
  logic  r_out_ready [MX][MY][NUM_PORTS];
  flit_t r_out_flit  [MX][MY][NUM_PORTS];
  logic  r_bypass    [MX][MY];

  // SM-side network interfaces, indexed by mesh position
  logic  ni_valid [MX][MY];
  logic  ni_ready [MX][MY];
  flit_t ni_flit  [MX][MY];

  // ------------------------------------------------------------ pairs
  for (genvar p = 0; p < NP; p++) begin : g_pair
    localparam int unsigned PX = p % MX;
    localparam int unsigned PY = 1 + 2 * (p / MX);

    logic [1:0]             dpv, mv, mr, ms, l1v, l1h, fv, niv, nir;
    logic [WID_W-1:0]       dpw [2];
    logic [ADDR_W-1:0]      ma  [2][WARP_SIZE];
    logic [WARP_SIZE-1:0]   mact[2];
    logic [LINE_ADDR_W-1:0] l1l [2], fl [2];
    logic [LINE_BITS-1:0]   l1d [2], fd [2];
    logic [WARPS_PER_SM-1:0] rdy [2];
    flit_t                  nif [2];
    logic                   byp, d1s0;

    for (genvar k = 0; k < 2; k++) begin : g_sm
      assign rdy[k]  = ready[2*p+k];
      assign mv[k]   = mem_valid[2*p+k];
      assign ma[k]   = mem_addr[2*p+k];
      assign mact[k] = mem_active[2*p+k];
      assign ms[k]   = mem_store[2*p+k];
      assign fv[k]   = fill_valid[2*p+k];
      assign fl[k]   = fill_line[2*p+k];
      assign fd[k]   = fill_data[2*p+k];
      assign dp_valid[2*p+k]  = dpv[k];
      assign dp_warp[2*p+k]   = dpw[k];
      assign mem_ready[2*p+k] = mr[k];
      assign l1_valid[2*p+k]  = l1v[k];
      assign l1_hit[2*p+k]    = l1h[k];
      assign l1_line[2*p+k]   = l1l[k];
      assign l1_data[2*p+k]   = l1d[k];
      assign ni_valid[PX][PY+k] = niv[k];
      assign ni_flit[PX][PY+k]  = nif[k];
      assign nir[k]             = ni_ready[PX][PY+k];
    end
    assign r_bypass[PX][PY]   = 1'b0;
    assign r_bypass[PX][PY+1] = byp;

    amoeba_sm_pair u_pair (
      .clk, .rst_n, .pos_x(COORD_W'(PX)), .pos_y0(COORD_W'(PY)), .fuse_mode, .regroup,
      .ready(rdy), .warp_active(warp_active[p]),
      .dp_valid(dpv), .dp_warp(dpw), .dp1_from_sm0(d1s0),
      .dec_valid(dec_valid[p]), .dec_warp(dec_warp[p]), .dec_ctrl_div(dec_ctrl_div[p]),
      .mlk_valid(mlk_valid[p]), .mlk_warp(mlk_warp[p]),
      .mlk_active(mlk_active[p]), .mlk_slow(mlk_slow[p]),
      .sm1_exit_valid(sm1_exit_valid[p]), .sm1_exit_warp(sm1_exit_warp[p]),
      .sm1_stall(sm1_stall[p]),
      .split(split[p]), .move_valid(move_valid[p]), .move_entry(move_entry[p]),
      .fast_valid(fast_valid[p]), .fast_warp(fast_warp[p]),
      .n_split_ctrl(n_split_ctrl[p]), .n_split_mem(n_split_mem[p]),
      .n_refuse(n_refuse[p]), .n_fast_moves(n_fast_moves[p]),
      .mem_valid(mv), .mem_ready(mr), .mem_addr(ma), .mem_active(mact), .mem_store(ms),
      .l1_valid(l1v), .l1_hit(l1h), .l1_line(l1l), .l1_data(l1d),
      .fill_valid(fv), .fill_line(fl), .fill_data(fd),
      .ni_valid(niv), .ni_ready(nir), .ni_flit(nif), .router_bypass(byp),
      .ev_thread_acc(p_thread_acc[p]), .ev_mem_actual(p_mem_actual[p]),
      .ev_l1d_acc(p_l1d_acc[p]), .ev_l1d_miss(p_l1d_miss[p])
    );
  end

  // ------------------------------------------------------------ routers
  for (genvar x = 0; x < MX; x++) begin : g_x
    for (genvar y = 0; y < MY; y++) begin : g_y
      // positions without an SM (only when NSM does not fill the rows)
      if (y == 0) begin : g_mc_row
        assign r_bypass[x][y] = 1'b0;
      end else if (x + MX * ((y - 1) / 2) >= NP) begin : g_empty
        assign ni_valid[x][y] = 1'b0;
        assign ni_flit[x][y]  = '0;
        assign r_bypass[x][y] = 1'b0;
      end

      noc_router #(.YX_FIRST(1'b1)) u_router (
        .clk, .rst_n, .my_x(COORD_W'(x)), .my_y(COORD_W'(y)), .bypass(r_bypass[x][y]),
        .in_valid(r_in_valid[x][y]), .in_ready(r_in_ready[x][y]), .in_flit(r_in_flit[x][y]),
        .out_valid(r_out_valid[x][y]), .out_ready(r_out_ready[x][y]),
        .out_flit(r_out_flit[x][y])
      );

      // local port
      if (y == 0) begin : g_mc
        if (x < NUM_MC) begin : g_port
          assign mc_valid[x]                = r_out_valid[x][y][P_LOCAL];
          assign mc_flit[x]                 = r_out_flit[x][y][P_LOCAL];
          assign r_out_ready[x][y][P_LOCAL] = mc_ready[x];
        end else begin : g_none
          assign r_out_ready[x][y][P_LOCAL] = 1'b1;
        end
        assign r_in_valid[x][y][P_LOCAL] = 1'b0;
        assign r_in_flit[x][y][P_LOCAL]  = '0;
      end else begin : g_sm
        assign r_in_valid[x][y][P_LOCAL]  = ni_valid[x][y];
        assign r_in_flit[x][y][P_LOCAL]   = ni_flit[x][y];
        assign ni_ready[x][y]             = r_in_ready[x][y][P_LOCAL];
        assign r_out_ready[x][y][P_LOCAL] = 1'b1;   // requests never end at an SM
      end

      // north link
      if (y == 0) begin : g_n_edge
        assign r_in_valid[x][y][P_NORTH]  = 1'b0;
        assign r_in_flit[x][y][P_NORTH]   = '0;
        assign r_out_ready[x][y][P_NORTH] = 1'b1;
      end else begin : g_n
        assign r_in_valid[x][y][P_NORTH]  = r_out_valid[x][y-1][P_SOUTH];
        assign r_in_flit[x][y][P_NORTH]   = r_out_flit[x][y-1][P_SOUTH];
        assign r_out_ready[x][y][P_NORTH] = r_in_ready[x][y-1][P_SOUTH];
      end
      // south link
      if (y == MY - 1) begin : g_s_edge
        assign r_in_valid[x][y][P_SOUTH]  = 1'b0;
        assign r_in_flit[x][y][P_SOUTH]   = '0;
        assign r_out_ready[x][y][P_SOUTH] = 1'b1;
      end else begin : g_s
        assign r_in_valid[x][y][P_SOUTH]  = r_out_valid[x][y+1][P_NORTH];
        assign r_in_flit[x][y][P_SOUTH]   = r_out_flit[x][y+1][P_NORTH];
        assign r_out_ready[x][y][P_SOUTH] = r_in_ready[x][y+1][P_NORTH];
      end
      // east link
      if (x == MX - 1) begin : g_e_edge
        assign r_in_valid[x][y][P_EAST]  = 1'b0;
        assign r_in_flit[x][y][P_EAST]   = '0;
        assign r_out_ready[x][y][P_EAST] = 1'b1;
      end else begin : g_e
        assign r_in_valid[x][y][P_EAST]  = r_out_valid[x+1][y][P_WEST];
        assign r_in_flit[x][y][P_EAST]   = r_out_flit[x+1][y][P_WEST];
        assign r_out_ready[x][y][P_EAST] = r_in_ready[x+1][y][P_WEST];
      end
      // west link
      if (x == 0) begin : g_w_edge
        assign r_in_valid[x][y][P_WEST]  = 1'b0;
        assign r_in_flit[x][y][P_WEST]   = '0;
        assign r_out_ready[x][y][P_WEST] = 1'b1;
      end else begin : g_w
        assign r_in_valid[x][y][P_WEST]  = r_out_valid[x-1][y][P_EAST];
        assign r_in_flit[x][y][P_WEST]   = r_out_flit[x-1][y][P_EAST];
        assign r_out_ready[x][y][P_WEST] = r_in_ready[x-1][y][P_EAST];
      end
    end
  end
endmodule

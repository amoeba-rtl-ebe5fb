// amoeba_pkg: sizes, types and constants shared by the AMOEBA reconfiguration
// fabric.
//
// The GPU is built from scale-out SMs that can be fused in neighbouring pairs
// into one scale-up SM. The numbers below follow the evaluated configuration
// (48 SMs, warp size 32, 1024 threads per SM, 16 KB L1, 8 memory controllers,
// 128-bit mesh channels) and the regression coefficients of the scalability
// predictor. The cache line size, the L1 associativity, the thread-group size
// used for warp regrouping and all fixed-point formats are this design's own
// choices; each is marked where it is defined.
package amoeba_pkg;

  // ---------------------------------------------------------------- GPU size
  localparam int unsigned NUM_SM        = 48;   // scale-out SMs
  localparam int unsigned NUM_PAIRS     = NUM_SM / 2;
  localparam int unsigned NUM_MC        = 8;    // memory controllers
  localparam int unsigned WARP_SIZE     = 32;   // threads per scale-out warp
  localparam int unsigned FUSED_WARP    = 2 * WARP_SIZE; // warp of a fused SM
  localparam int unsigned THREADS_PER_SM = 1024;
  localparam int unsigned WARPS_PER_SM  = THREADS_PER_SM / WARP_SIZE; // 32
  localparam int unsigned WID_W         = $clog2(WARPS_PER_SM);       // 5
  localparam int unsigned MSHR_PER_SM   = 64;

  // Thread group used when a divergent warp is regrouped. Chosen equal to the
  // SIMD pipeline width of the configuration table (8): a fused warp of 64
  // threads is 8 groups, each half-warp 4 groups.
  localparam int unsigned GROUP_SIZE    = 8;
  localparam int unsigned NUM_GROUPS    = FUSED_WARP / GROUP_SIZE;    // 8

  // ---------------------------------------------------------------- memory
  localparam int unsigned ADDR_W        = 32;
  localparam int unsigned LINE_BYTES    = 128;  // own choice
  localparam int unsigned LINE_BITS     = LINE_BYTES * 8;
  localparam int unsigned OFFSET_W      = $clog2(LINE_BYTES);
  localparam int unsigned L1_BYTES      = 16 * 1024;
  localparam int unsigned L1_WAYS       = 4;    // own choice
  localparam int unsigned L1_SETS       = L1_BYTES / (LINE_BYTES * L1_WAYS); // 32
  localparam int unsigned LINE_ADDR_W   = ADDR_W - OFFSET_W;

  // ---------------------------------------------------------------- NoC
  // Request mesh: MESH_X columns by MESH_Y rows. Row 0 holds the memory
  // controllers, rows 1..6 hold the SMs; the two SMs of a pair are vertical
  // neighbours in one column (own choice of floorplan).
  localparam int unsigned FLIT_W        = 128;  // NoC channel width
  localparam int unsigned MESH_X        = 8;
  localparam int unsigned MESH_Y        = 1 + NUM_SM / MESH_X; // 7
  localparam int unsigned COORD_W       = 4;

  typedef enum logic [1:0] {
    PKT_LOAD  = 2'd0,
    PKT_STORE = 2'd1,
    PKT_REPLY = 2'd2
  } pkt_kind_e;

  // One single-flit packet, exactly one channel wide.
  typedef struct packed {
    logic [COORD_W-1:0]       dst_x;
    logic [COORD_W-1:0]       dst_y;
    logic [COORD_W-1:0]       src_x;
    logic [COORD_W-1:0]       src_y;
    pkt_kind_e                kind;
    logic [LINE_ADDR_W-1:0]   line;
    logic [FLIT_W-2*4*COORD_W-2-LINE_ADDR_W-1:0] tag;
  } flit_t;

  // Router port numbering.
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0,
    P_NORTH = 3'd1,
    P_EAST  = 3'd2,
    P_SOUTH = 3'd3,
    P_WEST  = 3'd4
  } port_e;
  localparam int unsigned NUM_PORTS = 5;

  // ---------------------------------------------------------------- predictor
  // Metrics in the order of the coefficient table.
  typedef enum logic [3:0] {
    M_CONC_CTA  = 4'd0,  // concurrent CTAs (integer)
    M_CTRL_DIV  = 4'd1,  // inactive-thread (control divergence) rate
    M_COALESCE  = 4'd2,  // actual accesses / accesses in instructions
    M_L1D_MISS  = 4'd3,
    M_L1I_MISS  = 4'd4,
    M_L1C_MISS  = 4'd5,
    M_MSHR      = 4'd6,  // MSHR merges / L1D misses
    M_LOAD_RATE = 4'd7,
    M_STORE_RATE= 4'd8,
    M_NOC       = 4'd9   // average packet latency in cycles
  } metric_e;
  localparam int unsigned NUM_METRICS = 10;

  // Metric values: unsigned Q8.16 (rates are in [0,1], counts and latencies
  // saturate at 255.99).
  localparam int unsigned MET_W    = 24;
  localparam int unsigned MET_FRAC = 16;
  typedef logic [MET_W-1:0] metric_t;

  // Coefficients: signed Q13.10 (value * 1024, rounded).
  localparam int unsigned COEF_W    = 24;
  localparam int unsigned COEF_FRAC = 10;
  typedef logic signed [COEF_W-1:0] coef_t;

  localparam coef_t COEF_CONST = -24'sd75402;    //  -73.635
  localparam coef_t COEF [NUM_METRICS] = '{
     24'sd1448,      //    1.414  concurrent cta
     24'sd455299,    //  444.628  control divergent
     24'sd2106419,   // 2057.050  coalescing
    -24'sd321370,    // -313.838  L1D miss rate
     24'sd1714701,   // 1674.513  L1I miss rate
    -24'sd68892,     //  -67.277  L1C miss rate
    -24'sd105442,    // -102.971  MSHR
    -24'sd697125,    // -680.786  load inst rate
    -24'sd824013,    // -804.7    store inst rate
    -24'sd8500       //   -8.301  NoC
  };

  localparam int unsigned ACC_W = 56;  // MAC accumulator, Q.26

  // Per-cycle events of the profiled SM pair reported to the CTA profiler.
  typedef struct packed {
    logic       ctrl_idle;     // threads idle this cycle waiting on a control instruction
    logic [1:0] inst;          // instructions issued this cycle
    logic       ld_inst;       // a load instruction issued
    logic       st_inst;       // a store instruction issued
    logic [6:0] mem_thread;    // thread-level memory accesses in instructions
    logic [1:0] mem_actual;    // coalesced requests that left the coalescers
    logic [1:0] l1d_acc;       // L1D load lookups
    logic [1:0] l1d_miss;      // L1D load misses
    logic       l1i_acc;
    logic       l1i_miss;
    logic       l1c_acc;
    logic       l1c_miss;
    logic       mshr_merge;    // a miss merged into an existing MSHR entry
    logic       noc_pkt;       // a reply packet arrived
    logic [15:0] noc_lat;      // its network latency in cycles
    logic [3:0] cta_active;    // CTAs resident on the profiled SM
  } prof_events_t;

  // ---------------------------------------------------------------- splitting
  typedef enum logic [1:0] {
    DIV_CTRL = 2'd0,  // control-divergent warp (table Tc)
    DIV_MEM  = 2'd1,  // memory-divergent warp (table Tm)
    DIV_FAST = 2'd2   // fast warp moved to a stalled SM1
  } div_kind_e;

  // Entry of the divergent-warp bin.
  typedef struct packed {
    logic [WID_W-1:0]      warp;
    div_kind_e             kind;
    logic [NUM_GROUPS-1:0] slow_groups; // groups that form the slow half-warp
  } div_entry_t;

endpackage

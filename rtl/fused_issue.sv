// fused_issue: warp issue of an SM pair, the part of the control logic that
// fusion rewires.
//
// Each SM has its own GTO warp issue scheduler and its own scoreboard. Split
// (fused = 0), the two schedulers work independently: SM0 issues from
// ready0, SM1 from ready1, each to its own datapath. Fused, SM1's issue
// scheduler is switched off and SM1's scoreboard is connected to SM0's
// scheduler instead: a fused warp w is ready only when both halves are ready
// (ready0[w] & ready1[w], each scoreboard checking the registers held in its
// own register file). SM0's scheduler then sends the selected warp to both
// datapaths, which execute its two halves in lockstep (`dp1_from_sm0` steers
// SM1's datapath to SM0's issue port).
//
// Interface: ready vectors in, per-datapath issue valid and warp out.
// Timing: combinational from ready to issue, one warp per datapath per cycle.
//
// The rewiring (one scheduler kept, SM1's scoreboard moved to it, the selected
// warp sent to both datapaths, register files and scoreboards untouched)
// follows the paper's fusion figure. Requiring both halves to be ready is
// this design's reading of lockstep execution.
module fused_issue
  import amoeba_pkg::*;
#(
  parameter int unsigned NW = WARPS_PER_SM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              fused,
  input  logic [NW-1:0]     ready0,      // SM0 scoreboard + I-buffer
  input  logic [NW-1:0]     ready1,      // SM1 scoreboard + I-buffer
  output logic              dp0_valid,
  output logic [$clog2(NW)-1:0] dp0_warp,
  output logic              dp1_valid,
  output logic [$clog2(NW)-1:0] dp1_warp,
  output logic              dp1_from_sm0 // SM1 datapath driven by SM0's issue
);
  localparam int unsigned W = $clog2(NW);

  logic [NW-1:0] sched0_ready;
  logic          s0_issue, s1_issue;
  logic [W-1:0]  s0_warp, s1_warp;

  // fused: SM1's scoreboard feeds SM0's scheduler
  assign sched0_ready = fused ? (ready0 & ready1) : ready0;

  gto_scheduler #(.NW(NW)) u_sched0 (
    .clk, .rst_n, .enable(1'b1), .ready(sched0_ready),
    .issue(s0_issue), .warp(s0_warp)
  );

  // SM1's warp issue scheduler is disabled while fused
  gto_scheduler #(.NW(NW)) u_sched1 (
    .clk, .rst_n, .enable(!fused), .ready(ready1),
    .issue(s1_issue), .warp(s1_warp)
  );

  assign dp1_from_sm0 = fused;
  assign dp0_valid    = s0_issue;
  assign dp0_warp     = s0_warp;
  assign dp1_valid    = fused ? s0_issue : s1_issue;
  assign dp1_warp     = fused ? s0_warp  : s1_warp;

  // lockstep: while fused both datapaths always carry the same warp
  assert property (@(posedge clk) disable iff (!rst_n)
                   fused |-> (dp0_valid == dp1_valid) && (!dp0_valid || dp0_warp == dp1_warp));
endmodule

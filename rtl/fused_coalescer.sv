// fused_coalescer: the coalescing units of an SM pair, fused into one when
// the pair is fused.
//
// Split (fused = 0), each SM's memory instruction (WARP_SIZE lanes) is
// coalesced by its own unit: port 0 by unit 0, port 1 by unit 1. Fused, the
// two SMs execute the two halves of one 64-thread warp in lockstep and the
// fused memory unit coalesces them together: unit 0 takes lanes 0..31 from
// port 0 and lanes 32..63 from port 1 in the same cycle and unit 1 is idle.
// Accesses of both halves to the same line then become a single request,
// which is where a fused SM saves memory traffic.
//
// Interface: per port an instruction in (addresses, active mask, store flag,
// valid/ready) and a request stream out (line, lane mask over 64 lanes,
// valid/ready). `thread_acc` and `req_count` expose how many thread accesses
// entered and how many line requests left, for the coalescing-rate counter.
// Timing: see coalesce_engine; one request per unit per cycle.
//
// One coalescing unit per fused SM, made from the two units, follows the
// paper; the lane split between the ports is this design's choice.
module fused_coalescer
  import amoeba_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    fused,
  input  logic [1:0]              in_valid,
  output logic [1:0]              in_ready,
  input  logic [ADDR_W-1:0]       in_addr   [2][WARP_SIZE],
  input  logic [WARP_SIZE-1:0]    in_active [2],
  input  logic [1:0]              in_store,
  output logic [1:0]              out_valid,
  input  logic [1:0]              out_ready,
  output logic [LINE_ADDR_W-1:0]  out_line  [2],
  output logic [FUSED_WARP-1:0]   out_mask  [2],
  output logic [1:0]              out_store,
  output logic [1:0]              out_last,
  output logic [6:0]              thread_acc,   // thread accesses accepted this cycle
  output logic [1:0]              req_count     // requests sent this cycle
);
  logic [ADDR_W-1:0]     a0 [FUSED_WARP];
  logic [FUSED_WARP-1:0] m0;
  logic                  v0, r0;
  logic                  v1, r1;
  logic [WARP_SIZE-1:0]  mask1;

  always_comb begin
    for (int i = 0; i < WARP_SIZE; i++) begin
      a0[i]             = in_addr[0][i];
      a0[i + WARP_SIZE] = in_addr[1][i];
    end
  end
  // fused: both halves go to unit 0 when both ports present them
  assign m0 = fused ? {in_active[1], in_active[0]} : {{WARP_SIZE{1'b0}}, in_active[0]};
  assign v0 = fused ? (in_valid[0] && in_valid[1]) : in_valid[0];
  assign v1 = !fused && in_valid[1];

  coalesce_engine #(.LANES(FUSED_WARP)) u_unit0 (
    .clk, .rst_n,
    .in_valid(v0), .in_ready(r0), .in_addr(a0), .in_active(m0), .in_store(in_store[0]),
    .out_valid(out_valid[0]), .out_ready(out_ready[0]), .out_line(out_line[0]),
    .out_mask(out_mask[0]), .out_store(out_store[0]), .out_last(out_last[0])
  );

  coalesce_engine #(.LANES(WARP_SIZE)) u_unit1 (
    .clk, .rst_n,
    .in_valid(v1), .in_ready(r1), .in_addr(in_addr[1]), .in_active(in_active[1]),
    .in_store(in_store[1]),
    .out_valid(out_valid[1]), .out_ready(out_ready[1]), .out_line(out_line[1]),
    .out_mask(mask1), .out_store(out_store[1]), .out_last(out_last[1])
  );
  assign out_mask[1] = {mask1, {WARP_SIZE{1'b0}}};

  assign in_ready[0] = r0;
  assign in_ready[1] = fused ? r0 : r1;

  always_comb begin
    thread_acc = '0;
    if (v0 && r0)
      for (int i = 0; i < FUSED_WARP; i++) thread_acc = thread_acc + 7'(m0[i]);
    if (v1 && r1)
      for (int i = 0; i < WARP_SIZE; i++) thread_acc = thread_acc + 7'(in_active[1][i]);
    req_count = 2'(out_valid[0] && out_ready[0]) + 2'(out_valid[1] && out_ready[1]);
  end
endmodule

// gto_scheduler: greedy-then-oldest warp issue scheduler of one SM.
//
// It keeps issuing the warp it issued last as long as that warp is ready
// (greedy); when it is not, it picks the oldest ready warp. Warp age is taken
// from the warp slot order, slot 0 being the oldest (slots are filled in
// launch order). One warp is chosen per cycle, combinationally from `ready`;
// the greedy warp is remembered at the clock edge when `issue` is taken.
//
// The policy is the one of the evaluated configuration; using slot order as
// age is this design's simplification.
module gto_scheduler
  import amoeba_pkg::*;
#(
  parameter int unsigned NW = WARPS_PER_SM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [NW-1:0]     ready,
  output logic              issue,
  output logic [$clog2(NW)-1:0] warp
);
  localparam int unsigned W = $clog2(NW);
  logic [W-1:0] last;
  logic         last_v;
  logic [W-1:0] oldest;
  logic         any;

  always_comb begin
    any    = 1'b0;
    oldest = '0;
    for (int i = NW - 1; i >= 0; i--)
      if (ready[i]) begin
        any    = 1'b1;
        oldest = W'(i);
      end
  end

  assign issue = enable && any;
  assign warp  = (last_v && ready[last]) ? last : oldest;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last   <= '0;
      last_v <= 1'b0;
    end else if (issue) begin
      last   <= warp;
      last_v <= 1'b1;
    end
  end
endmodule

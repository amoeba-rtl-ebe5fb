// divergent_warp_queue: the "bin" of a fused SM pair, a FIFO of the warps
// found divergent while the pair runs fused.
//
// Each entry (div_entry_t) names the warp, why it was collected (control or
// memory divergence) and which thread groups form its slow half. When the
// pair splits, the switch controller pops the entries one per cycle and moves
// those warps to SM1. A full queue refuses pushes (`full`), a push and a pop
// in the same cycle are both served.
//
// Interface: push/pop with `full`/`empty`, `count` entries, first-word
// fall-through read (`head` is valid whenever `empty` is low).
// Timing: an entry pushed at one edge is readable after it.
//
// The paper calls for a new warp queue to hold the divergent warps; its depth
// (one entry per warp slot) and the FIFO order are this design's choice.
module divergent_warp_queue
  import amoeba_pkg::*;
#(
  parameter int unsigned DEPTH = WARPS_PER_SM
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       push,
  input  div_entry_t push_data,
  input  logic       pop,
  output div_entry_t head,
  output logic       full,
  output logic       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PTR_W = $clog2(DEPTH);

  div_entry_t          mem [DEPTH];
  logic [PTR_W-1:0]    rd_ptr, wr_ptr;

  logic do_push, do_pop;
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign head    = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PTR_W'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= (rd_ptr == PTR_W'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  // a push into a full queue (without a pop) is lost: callers must not do it
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("divergent_warp_queue: push while full");
endmodule

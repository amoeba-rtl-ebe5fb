// coalesce_engine: memory coalescing for one warp instruction of up to LANES
// threads.
//
// On `in_valid && in_ready` the per-thread byte addresses and the active mask
// are captured. Then, one request per cycle, the engine takes the lowest
// still-pending lane, emits its cache-line address together with the mask of
// all pending lanes that fall into the same line, and clears those lanes.
// An instruction whose active threads touch N distinct lines thus leaves as N
// requests in N cycles (when `out_ready` stays high); `in_ready` returns in
// the cycle after the last one.
//
// Combining the accesses of a warp to one cache line into one transaction is
// the coalescing the paper describes; the serial lowest-lane-first order is
// this design's choice.
module coalesce_engine
  import amoeba_pkg::*;
#(
  parameter int unsigned LANES = FUSED_WARP
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [ADDR_W-1:0]       in_addr [LANES],
  input  logic [LANES-1:0]        in_active,
  input  logic                    in_store,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [LINE_ADDR_W-1:0]  out_line,
  output logic [LANES-1:0]        out_mask,
  output logic                    out_store,
  output logic                    out_last       // last request of the instruction
);
  logic [ADDR_W-1:0] addr [LANES];
  logic [LANES-1:0]  pending;
  logic              store;

  logic [$clog2(LANES)-1:0] lead;
  always_comb begin
    lead = '0;
    for (int i = LANES - 1; i >= 0; i--)
      if (pending[i]) lead = ($clog2(LANES))'(i);
  end

  assign out_line = addr[lead][ADDR_W-1:OFFSET_W];
  always_comb begin
    for (int i = 0; i < LANES; i++)
      out_mask[i] = pending[i] && (addr[i][ADDR_W-1:OFFSET_W] == out_line);
  end
  assign out_valid = (pending != '0);
  assign out_store = store;
  assign out_last  = (pending & ~out_mask) == '0;
  assign in_ready  = (pending == '0);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) addr <= in_addr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      store   <= 1'b0;
    end else if (in_valid && in_ready) begin
      pending <= in_active;
      store   <= in_store;
    end else if (out_valid && out_ready) begin
      pending <= pending & ~out_mask;
    end
  end
endmodule

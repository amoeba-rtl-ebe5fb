// noc_router: one node of the 2D-mesh on-chip network, with the bypass path
// that lets a fused SM pair use a single router.
//
// Five ports (local, north, east, south, west), single-flit packets one
// channel (FLIT_W = 128 bits) wide and valid/ready flow control on every
// link. The pipeline has two stages: a flit is written into the input FIFO of
// its port (stage 1), then its output port is computed by dimension-order
// routing, a round-robin arbiter per output picks one of the competing inputs
// and the winner moves into that output's register (stage 2). Each hop thus
// costs two cycles. Routing is Y-first when YX_FIRST = 1 (north means
// decreasing y) and X-first otherwise.
//
// When the router's SM is fused into its neighbour (`bypass` = 1) the router
// is disabled: its local port neither accepts nor delivers flits, and flits
// arriving on port BYP_IN are written into that port's input buffer and leave
// from its head straight through port BYP_OUT, skipping route computation,
// arbitration and the output register: one cycle per hop. Other input
// ports are closed while bypassed, so the bypass is meant for a router whose
// through-traffic runs from BYP_IN to BYP_OUT only (the SM rows of the
// Y-first request mesh, where all traffic flows toward the memory
// controllers). Flits already buffered drain normally; the mode should only
// change when the router is empty of local traffic.
//
// Following the paper: mesh, two router pipeline stages, 128-bit channels,
// and a bypass path in the disabled router of a fused pair. The position is
// an input (tied to constants in the mesh) so that one router design serves
// every node. The FIFO depth,
// the flow control, the routing and arbitration are this design's own
// choices.
module noc_router
  import amoeba_pkg::*;
#(
  parameter bit          YX_FIRST = 1'b1,
  parameter int unsigned DEPTH    = 4,
  parameter int unsigned BYP_IN   = 3,   // P_SOUTH
  parameter int unsigned BYP_OUT  = 1    // P_NORTH
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic [COORD_W-1:0] my_x,   // this router's mesh position
  input  logic [COORD_W-1:0] my_y,
  input  logic   bypass,
  input  logic   in_valid  [NUM_PORTS],
  output logic   in_ready  [NUM_PORTS],
  input  flit_t  in_flit   [NUM_PORTS],
  output logic   out_valid [NUM_PORTS],
  input  logic   out_ready [NUM_PORTS],
  output flit_t  out_flit  [NUM_PORTS]
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned NP = NUM_PORTS;

  // ---------------------------------------------------------- input FIFOs
  flit_t             fifo  [NP][DEPTH];
  logic [PW-1:0]     rd    [NP];
  logic [PW-1:0]     wr    [NP];
  logic [PW:0]       cnt   [NP];
  logic              f_push[NP];
  logic              f_pop [NP];
  flit_t             head  [NP];
  logic              has   [NP];

  // ---------------------------------------------------------- routing
  function automatic logic [2:0] route(flit_t f);
    logic [2:0] p;
    if (YX_FIRST) begin
      if      (f.dst_y < my_y) p = P_NORTH;
      else if (f.dst_y > my_y) p = P_SOUTH;
      else if (f.dst_x > my_x) p = P_EAST;
      else if (f.dst_x < my_x) p = P_WEST;
      else                            p = P_LOCAL;
    end else begin
      if      (f.dst_x > my_x) p = P_EAST;
      else if (f.dst_x < my_x) p = P_WEST;
      else if (f.dst_y < my_y) p = P_NORTH;
      else if (f.dst_y > my_y) p = P_SOUTH;
      else                            p = P_LOCAL;
    end
    return p;
  endfunction

  logic [2:0] want [NP];
  always_comb begin
    for (int i = 0; i < NP; i++) begin
      head[i] = fifo[i][rd[i]];
      has[i]  = (cnt[i] != '0);
      want[i] = route(head[i]);
    end
  end

  // ---------------------------------------------------------- outputs
  logic          o_space [NP];
  logic          byp_take;           // bypass path moves a flit this cycle
  logic [2:0]    rr      [NP];       // round-robin pointer per output
  logic          gnt_v   [NP];
  logic [2:0]    gnt     [NP];       // input granted for each output

  logic          ov      [NP];       // output registers
  flit_t         of      [NP];

  // the bypass path: head of the BYP_IN buffer drives BYP_OUT directly once
  // the output register there has drained
  always_comb begin
    for (int o = 0; o < NP; o++) begin
      out_valid[o] = ov[o];
      out_flit[o]  = of[o];
    end
    if (bypass && !ov[BYP_OUT]) begin
      out_valid[BYP_OUT] = has[BYP_IN];
      out_flit[BYP_OUT]  = head[BYP_IN];
    end
    byp_take = bypass && !ov[BYP_OUT] && has[BYP_IN] && out_ready[BYP_OUT];
    for (int o = 0; o < NP; o++) o_space[o] = !ov[o] || out_ready[o];
  end

  // input considered k-th by output o's arbiter: rr[o] + k, wrapped
  function automatic logic [2:0] nth(logic [2:0] base, int unsigned k);
    logic [3:0] s;
    s = {1'b0, base} + 4'(k);
    return (s >= 4'(NP)) ? 3'(s - 4'(NP)) : s[2:0];
  endfunction

  logic       cand [NP][NP];   // input i may go to output o
  always_comb begin
    for (int i = 0; i < NP; i++)
      for (int o = 0; o < NP; o++)
        cand[i][o] = has[i] && want[i] == 3'(o) && !(bypass && i == BYP_IN);
    for (int o = 0; o < NP; o++) begin
      gnt_v[o] = 1'b0;
      gnt[o]   = '0;
      if (o_space[o] && !(bypass && o == BYP_OUT) && !(bypass && o == 32'(P_LOCAL))) begin
        // scan from the round-robin pointer; the last match is the nearest
        for (int k = NP - 1; k >= 0; k--) begin
          if (cand[nth(rr[o], k)][o]) begin
            gnt_v[o] = 1'b1;
            gnt[o]   = nth(rr[o], k);
          end
        end
      end
    end
    for (int i = 0; i < NP; i++) begin
      f_pop[i] = 1'b0;
      for (int o = 0; o < NP; o++)
        if (gnt_v[o] && gnt[o] == 3'(i)) f_pop[i] = 1'b1;
    end
    if (byp_take) f_pop[BYP_IN] = 1'b1;
  end

  // ---------------------------------------------------------- input side
  always_comb begin
    for (int i = 0; i < NP; i++) begin
      if (bypass && i != BYP_IN)
        in_ready[i] = 1'b0;
      else
        in_ready[i] = (cnt[i] != (PW+1)'(DEPTH));
      f_push[i] = in_valid[i] && in_ready[i];
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NP; i++)
      if (f_push[i]) fifo[i][wr[i]] <= in_flit[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NP; i++) begin
        rd[i]        <= '0;
        wr[i]        <= '0;
        cnt[i]       <= '0;
        rr[i]        <= '0;
        ov[i]        <= 1'b0;
        of[i]        <= '0;
      end
    end else begin
      for (int i = 0; i < NP; i++) begin
        if (f_push[i]) wr[i] <= (wr[i] == PW'(DEPTH-1)) ? '0 : wr[i] + 1'b1;
        if (f_pop[i])  rd[i] <= (rd[i] == PW'(DEPTH-1)) ? '0 : rd[i] + 1'b1;
        cnt[i] <= cnt[i] + (PW+1)'(f_push[i]) - (PW+1)'(f_pop[i]);
      end
      for (int o = 0; o < NP; o++) begin
        if (ov[o] && out_ready[o]) ov[o] <= 1'b0;
        if (gnt_v[o]) begin
          ov[o]        <= 1'b1;
          of[o]        <= head[gnt[o]];
          rr[o]        <= (gnt[o] == 3'(NP-1)) ? '0 : gnt[o] + 1'b1;
        end
      end
    end
  end
endmodule

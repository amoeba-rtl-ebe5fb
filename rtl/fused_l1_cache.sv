// fused_l1_cache: the L1 data caches of an SM pair, fusable by doubling the
// associativity.
//
// Each SM owns one bank: a SETS x WAYS set-associative cache of LINE_BITS
// lines (16 KB at the defaults: 32 sets, 4 ways, 128-byte lines). Split
// (fused = 0) the banks are two independent caches, bank i serving port i,
// and a lookup answers one cycle after the request. Fused, the two banks form
// one cache with the same number of sets and twice the ways: a request on
// port 0 (the fused memory unit) is compared with all 2*WAYS ways of its set
// in both banks, and because the banks sit side by side but the lookup is
// wider, the answer takes one extra cycle (two cycles). Port 1 is idle while
// fused.
//
// Policies: loads allocate on refill through the fill ports; stores do not
// allocate and evict a hit line (write-evict), the store itself going on to
// the memory side. A refill replaces the ways of a set round-robin; fused,
// refills alternate between the two banks of the set. A refill of a line
// already present rewrites it in place.
//
// Interface: per port req (line address, store flag), resp (hit, data) and
// fill (line address, data). Timing: resp_valid 1 cycle (split) or 2 cycles
// (fused) after req_valid; a fill is written at its clock edge and a lookup
// in the following cycle sees it.
//
// Following the paper: fusing by associativity, 16 KB per SM and the extra
// cycle when fused. The line size, bank associativity, replacement and write
// policy are this design's own choices.
module fused_l1_cache
  import amoeba_pkg::*;
#(
  parameter int unsigned SETS   = L1_SETS,
  parameter int unsigned WAYS   = L1_WAYS,
  parameter int unsigned LBITS  = LINE_BITS,
  parameter int unsigned LADDR  = LINE_ADDR_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             fused,
  input  logic [1:0]       req_valid,
  input  logic [LADDR-1:0] req_line  [2],
  input  logic [1:0]       req_store,
  output logic [1:0]       resp_valid,
  output logic [1:0]       resp_hit,
  output logic [1:0]       resp_store,
  output logic [LADDR-1:0] resp_line [2],
  output logic [LBITS-1:0] resp_data [2],
  input  logic [1:0]       fill_valid,
  input  logic [LADDR-1:0] fill_line [2],
  input  logic [LBITS-1:0] fill_data [2]
);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = LADDR - SET_W;

  // tags: one memory word per set and bank holding all WAYS tags; valid
  // bits, replacement pointers and bank toggles are flip-flops with reset
  logic [WAYS*TAG_W-1:0] tagm0 [SETS];
  logic [WAYS*TAG_W-1:0] tagm1 [SETS];
  logic             vld   [2][SETS][WAYS];
  logic [WAY_W-1:0] rr    [2][SETS];
  logic             bsel  [SETS];        // fused refill bank toggle
  logic [LBITS-1:0] data0 [SETS*WAYS];
  logic [LBITS-1:0] data1 [SETS*WAYS];

  function automatic logic [SET_W-1:0] set_of(logic [LADDR-1:0] l);
    return l[SET_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [LADDR-1:0] l);
    return l[LADDR-1:SET_W];
  endfunction

  // ------------------------------------------------------------ lookup
  // hit_b[p][b] / hway[p][b]: port p's request hits bank b in way hway
  logic             hit_b [2][2];
  logic [WAY_W-1:0] hway  [2][2];
  always_comb begin
    for (int p = 0; p < 2; p++)
      for (int b = 0; b < 2; b++) begin
        hit_b[p][b] = 1'b0;
        hway[p][b]  = '0;
        for (int w = WAYS - 1; w >= 0; w--)
          if (vld[b][set_of(req_line[p])][w] &&
              (b == 0 ? tagm0[set_of(req_line[p])][w*TAG_W +: TAG_W]
                      : tagm1[set_of(req_line[p])][w*TAG_W +: TAG_W]) == tag_of(req_line[p])) begin
            hit_b[p][b] = 1'b1;
            hway[p][b]  = WAY_W'(w);
          end
      end
  end

  // which bank serves port p: split -> own bank; fused -> bank 0 first
  logic       p_hit  [2];
  logic       p_bank [2];
  always_comb begin
    p_hit[0]  = fused ? (hit_b[0][0] | hit_b[0][1]) : hit_b[0][0];
    p_bank[0] = fused ? (!hit_b[0][0] && hit_b[0][1]) : 1'b0;
    p_hit[1]  = hit_b[1][1];
    p_bank[1] = 1'b1;
  end

  // stage 1 (split answer, or first half of a fused lookup)
  logic [1:0]       s1_valid, s1_hit, s1_store;
  logic             s1_fused;
  logic [LADDR-1:0] s1_line [2];
  logic [LBITS-1:0] s1_data [2];
  // stage 2 (fused answer)
  logic             s2_valid, s2_hit, s2_store;
  logic [LADDR-1:0] s2_line;
  logic [LBITS-1:0] s2_data;

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (p_bank[p]) s1_data[p] <= data1[{set_of(req_line[p]), hway[p][1]}];
      else           s1_data[p] <= data0[{set_of(req_line[p]), hway[p][0]}];
      s1_line[p] <= req_line[p];
    end
    s2_data <= s1_data[0];
    s2_line <= s1_line[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= '0;
      s1_hit   <= '0;
      s1_store <= '0;
      s1_fused <= 1'b0;
      s2_valid <= 1'b0;
      s2_hit   <= 1'b0;
      s2_store <= 1'b0;
    end else begin
      s1_valid <= fused ? {1'b0, req_valid[0]} : req_valid;
      s1_hit   <= {p_hit[1], p_hit[0]};
      s1_store <= req_store;
      s1_fused <= fused;
      s2_valid <= s1_valid[0] && s1_fused;
      s2_hit   <= s1_hit[0];
      s2_store <= s1_store[0];
    end
  end

  always_comb begin
    // port 0
    if (s1_fused) begin
      resp_valid[0] = s2_valid;
      resp_hit[0]   = s2_hit;
      resp_store[0] = s2_store;
      resp_line[0]  = s2_line;
      resp_data[0]  = s2_data;
    end else begin
      resp_valid[0] = s1_valid[0];
      resp_hit[0]   = s1_hit[0];
      resp_store[0] = s1_store[0];
      resp_line[0]  = s1_line[0];
      resp_data[0]  = s1_data[0];
    end
    // port 1
    resp_valid[1] = s1_valid[1];
    resp_hit[1]   = s1_hit[1];
    resp_store[1] = s1_store[1];
    resp_line[1]  = s1_line[1];
    resp_data[1]  = s1_data[1];
  end

  // ------------------------------------------------------------ refill
  // fill port f writes bank fb[f], way fw[f]
  logic             f_en   [2];
  logic             fb     [2];
  logic [WAY_W-1:0] fw     [2];
  logic             f_hit  [2][2];
  logic [WAY_W-1:0] f_hway [2][2];
  always_comb begin
    for (int f = 0; f < 2; f++) begin
      for (int b = 0; b < 2; b++) begin
        f_hit[f][b]  = 1'b0;
        f_hway[f][b] = '0;
        for (int w = WAYS - 1; w >= 0; w--)
          if (vld[b][set_of(fill_line[f])][w] &&
              (b == 0 ? tagm0[set_of(fill_line[f])][w*TAG_W +: TAG_W]
                      : tagm1[set_of(fill_line[f])][w*TAG_W +: TAG_W]) == tag_of(fill_line[f])) begin
            f_hit[f][b]  = 1'b1;
            f_hway[f][b] = WAY_W'(w);
          end
      end
    end
    // fill port 0
    f_en[0] = fill_valid[0];
    if (fused) begin
      if (f_hit[0][0])      begin fb[0] = 1'b0; fw[0] = f_hway[0][0]; end
      else if (f_hit[0][1]) begin fb[0] = 1'b1; fw[0] = f_hway[0][1]; end
      else begin
        fb[0] = bsel[set_of(fill_line[0])];
        fw[0] = rr[bsel[set_of(fill_line[0])]][set_of(fill_line[0])];
      end
    end else begin
      fb[0] = 1'b0;
      fw[0] = f_hit[0][0] ? f_hway[0][0] : rr[0][set_of(fill_line[0])];
    end
    // fill port 1 (split only)
    f_en[1] = fill_valid[1] && !fused;
    fb[1]   = 1'b1;
    fw[1]   = f_hit[1][1] ? f_hway[1][1] : rr[1][set_of(fill_line[1])];
  end

  // new tag word of the set a fill port writes: the old word with one way replaced
  logic [WAYS*TAG_W-1:0] f_tagw [2];
  always_comb begin
    for (int f = 0; f < 2; f++) begin
      f_tagw[f] = fb[f] ? tagm1[set_of(fill_line[f])] : tagm0[set_of(fill_line[f])];
      for (int w = 0; w < WAYS; w++)
        if (fw[f] == WAY_W'(w)) f_tagw[f][w*TAG_W +: TAG_W] = tag_of(fill_line[f]);
    end
  end

  always_ff @(posedge clk) begin
    for (int f = 0; f < 2; f++)
      if (f_en[f]) begin
        if (fb[f]) begin
          data1[{set_of(fill_line[f]), fw[f]}] <= fill_data[f];
          tagm1[set_of(fill_line[f])]          <= f_tagw[f];
        end else begin
          data0[{set_of(fill_line[f]), fw[f]}] <= fill_data[f];
          tagm0[set_of(fill_line[f])]          <= f_tagw[f];
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < 2; b++)
        for (int s = 0; s < SETS; s++) begin
          rr[b][s] <= '0;
          for (int w = 0; w < WAYS; w++)
            vld[b][s][w] <= 1'b0;
        end
      for (int s = 0; s < SETS; s++) bsel[s] <= 1'b0;
    end else begin
      // write-evict: a store that hits invalidates the line
      for (int p = 0; p < 2; p++)
        if (req_valid[p] && req_store[p] && (p == 0 || !fused))
          for (int b = 0; b < 2; b++)
            if (hit_b[p][b] && (fused || b == p))
              vld[b][set_of(req_line[p])][hway[p][b]] <= 1'b0;
      // refills (after the evictions, so a refill of the same cycle wins)
      for (int f = 0; f < 2; f++)
        if (f_en[f]) begin
          vld[fb[f]][set_of(fill_line[f])][fw[f]] <= 1'b1;
          if (!(f_hit[f][0] && fb[f] == 1'b0) && !(f_hit[f][1] && fb[f] == 1'b1)) begin
            rr[fb[f]][set_of(fill_line[f])] <= rr[fb[f]][set_of(fill_line[f])] + 1'b1;
            if (fused && f == 0) bsel[set_of(fill_line[f])] <= !bsel[set_of(fill_line[f])];
          end
        end
    end
  end

  // the fused cache has a single port
  assert property (@(posedge clk) disable iff (!rst_n) fused |-> !req_valid[1]);
endmodule

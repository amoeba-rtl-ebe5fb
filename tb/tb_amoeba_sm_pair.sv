// tb_amoeba_sm_pair: one SM pair at mesh column 2, rows 1/2, with its network
// interfaces drained by the bench and refills returned by the bench.
//   scale-out: each SM coalesces and looks up its own L1 bank (1 cycle) and
//     sends misses from its own network interface with its own row as source;
//     the router is not bypassed.
//   fused: one 64-thread instruction enters from both datapaths, the lookup
//     takes 2 cycles, misses leave only from SM0's interface with the router
//     of SM1 bypassed, a refill makes the next access hit with the line's
//     data, and issue is lockstep.
//   split: four control-divergent labels split the pair; the moved warps are
//     reported; SM1's own instruction then goes through the shared L1 port
//     and SM0's interface; when SM1 finishes the warps the pair re-fuses.
// Each packet's destination controller (line mod 8, row 0) is checked.
module tb_amoeba_sm_pair;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    fuse_mode = 1'b0, regroup = 1'b1;
  logic [WARPS_PER_SM-1:0] ready [2];
  logic [WARPS_PER_SM-1:0] warp_active;
  logic [1:0]              dp_valid;
  logic [WID_W-1:0]        dp_warp [2];
  logic                    dp1_from_sm0;
  logic                    dec_valid, dec_ctrl_div, mlk_valid, sm1_exit_valid, sm1_stall;
  logic [WID_W-1:0]        dec_warp, mlk_warp, sm1_exit_warp, fast_warp;
  logic [FUSED_WARP-1:0]   mlk_active, mlk_slow;
  logic                    split, move_valid, fast_valid;
  div_entry_t              move_entry;
  logic [15:0]             n_split_ctrl, n_split_mem, n_refuse, n_fast_moves;
  logic [1:0]              mem_valid, mem_ready, mem_store;
  logic [ADDR_W-1:0]       mem_addr [2][WARP_SIZE];
  logic [WARP_SIZE-1:0]    mem_active [2];
  logic [1:0]              l1_valid, l1_hit, fill_valid, ni_valid, ni_ready;
  logic [LINE_ADDR_W-1:0]  l1_line [2], fill_line [2];
  logic [LINE_BITS-1:0]    l1_data [2], fill_data [2];
  flit_t                   ni_flit [2];
  logic                    router_bypass;
  logic [6:0]              ev_thread_acc;
  logic [1:0]              ev_mem_actual, ev_l1d_acc, ev_l1d_miss;

  amoeba_sm_pair dut (.*, .pos_x(4'd2), .pos_y0(4'd1));

  int checks = 0, failures = 0;
  int n_pkt [2] = '{0, 0};
  int n_moves = 0, n_lockstep = 0;
  longint cyc = 0;
  longint t_acc;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  function automatic logic [LINE_BITS-1:0] pattern(input logic [LINE_ADDR_W-1:0] l);
    return {32{7'h33, l}};
  endfunction

  // network side: always ready, count and check packets, return refills
  typedef struct { longint due; int port; logic [LINE_ADDR_W-1:0] line; } fill_t;
  fill_t fills [$];
  always @(posedge clk) begin
    cyc++;
    if (rst_n) for (int p = 0; p < 2; p++)
      if (ni_valid[p] && ni_ready[p]) begin
        fill_t f;
        n_pkt[p]++;
        check(ni_flit[p].dst_y == 0 && int'(ni_flit[p].dst_x) == int'(ni_flit[p].line[2:0]), "destination");
        check(ni_flit[p].src_x == 2 && int'(ni_flit[p].src_y) == 1 + p, "source");
        if (ni_flit[p].kind == PKT_LOAD) begin
          f.due = cyc + 5; f.port = fuse_mode ? 0 : p; f.line = ni_flit[p].line;
          fills.push_back(f);
        end
      end
    if (rst_n && move_valid) n_moves++;
    if (rst_n && fuse_mode && !split && dp_valid[0]) begin
      n_lockstep++;
      check(dp_valid[1] && dp_warp[1] == dp_warp[0] && dp1_from_sm0, "lockstep");
    end
    if (rst_n) for (int p = 0; p < 2; p++)
      if (l1_valid[p] && l1_hit[p]) check(l1_data[p] == pattern(l1_line[p]), "hit data");
  end
  always @(negedge clk) begin
    fill_valid = '0;
    for (int i = 0; i < fills.size(); i++)
      if (fills[i].due <= cyc && !fill_valid[fills[i].port]) begin
        fill_valid[fills[i].port] = 1'b1;
        fill_line[fills[i].port]  = fills[i].line;
        fill_data[fills[i].port]  = pattern(fills[i].line);
        fills.delete(i);
        i--;
      end
  end

  // present an instruction on the given ports; returns the edges from
  // acceptance to the first L1 answer on port `rp`
  task automatic mem_op(input logic [1:0] ports, input logic [ADDR_W-1:0] base,
                        input int rp, output int lat, output bit hit);
    for (int k = 0; k < 2; k++) begin
      for (int i = 0; i < WARP_SIZE; i++) mem_addr[k][i] = base + ADDR_W'((k * WARP_SIZE + i) * 4);
      mem_active[k] = '1;
    end
    mem_store = '0;
    mem_valid = ports;
    while ((mem_ready & ports) != ports) @(negedge clk);
    @(negedge clk);
    mem_valid = '0;
    lat = 1;
    while (!l1_valid[rp] && lat < 20) begin lat++; @(negedge clk); end
    hit = l1_hit[rp];
    repeat (30) @(negedge clk);
  endtask

  task automatic label(input int w);
    dec_valid = 1'b1; dec_ctrl_div = 1'b1; dec_warp = WID_W'(w);
    @(negedge clk);
    dec_valid = 1'b0; dec_ctrl_div = 1'b0;
  endtask

  initial begin
    int lat;
    bit hit;
    ready = '{default: '0};
    warp_active = 32'h0000FFFF;
    {dec_valid, dec_ctrl_div, mlk_valid, sm1_exit_valid, sm1_stall} = '0;
    dec_warp = '0; mlk_warp = '0; sm1_exit_warp = '0; mlk_active = '0; mlk_slow = '0;
    mem_valid = '0; mem_store = '0; ni_ready = 2'b11;
    fill_valid = '0; fill_line = '{default: '0}; fill_data = '{default: '0};
    for (int k = 0; k < 2; k++) begin
      mem_active[k] = '0;
      for (int i = 0; i < WARP_SIZE; i++) mem_addr[k][i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // scale-out
    check(split && !router_bypass, "scale-out pair state");
    mem_op(2'b01, 32'h0001_0000, 0, lat, hit);
    check(lat == 2 && !hit, $sformatf("scale-out SM0 miss after %0d edges", lat));   // coalescer + 1-cycle L1
    mem_op(2'b10, 32'h0002_0000, 1, lat, hit);
    check(lat == 2 && !hit, $sformatf("scale-out SM1 miss after %0d edges", lat));
    check(n_pkt[0] == 1 && n_pkt[1] == 1, "one packet per SM interface");
    mem_op(2'b10, 32'h0002_0000, 1, lat, hit);
    check(hit, "scale-out SM1 refill did not hit");
    // fused
    fuse_mode = 1'b1;
    repeat (2) @(negedge clk);
    check(!split && router_bypass, "fused pair state");
    n_pkt = '{0, 0};
    mem_op(2'b11, 32'h0003_0000, 0, lat, hit);   // 64 lanes x 4 B: 2 lines
    check(lat == 3 && !hit, $sformatf("fused miss after %0d edges (2-cycle L1)", lat));
    check(n_pkt[0] == 2 && n_pkt[1] == 0, "fused misses leave from SM0 only");
    mem_op(2'b11, 32'h0003_0000, 0, lat, hit);
    check(lat == 3 && hit, "fused re-access did not hit");
    ready[0] = 32'h0000_0F00; ready[1] = 32'h0000_0F00;
    repeat (5) @(negedge clk);
    ready[0] = '0; ready[1] = '0;
    // split
    label(1); label(2); label(3); label(4);
    repeat (10) @(negedge clk);
    check(split && n_split_ctrl == 1 && n_moves == 4, $sformatf("split %0b moves %0d", split, n_moves));
    check(router_bypass, "network interface stays fused while split");
    n_pkt = '{0, 0};
    mem_op(2'b10, 32'h0004_0000, 0, lat, hit);   // SM1's instruction on the shared L1 port
    check(lat == 3 && !hit && n_pkt[0] == 1 && n_pkt[1] == 0, "split SM1 through the shared L1");
    for (int w = 1; w <= 4; w++) begin
      sm1_exit_valid = 1'b1; sm1_exit_warp = WID_W'(w);
      @(negedge clk);
    end
    sm1_exit_valid = 1'b0;
    @(negedge clk);
    check(!split && n_refuse == 1, "re-fusion");
    check(n_lockstep > 0, "no lockstep issue seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

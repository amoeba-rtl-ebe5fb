// tb_noc_router: one router placed at mesh position (3,2).
//   1. Latency: a lone flit from each input to each possible output takes
//      two clock edges from acceptance to the output (input buffer, then
//      route/arbitrate into the output register).
//   2. Random traffic on all five inputs to random destinations, with random
//      back-pressure on the outputs: every flit must leave on the port given
//      by Y-first routing, none may be lost or duplicated, and flits from one
//      input to one output keep their order.
//   3. Bypass mode: flits entering from the south leave to the north one edge
//      after acceptance, in order and under back-pressure; the local port
//      and the other inputs are closed.
module tb_noc_router;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic  bypass = 1'b0;
  logic  in_valid [NUM_PORTS], in_ready [NUM_PORTS];
  flit_t in_flit  [NUM_PORTS];
  logic  out_valid [NUM_PORTS], out_ready [NUM_PORTS];
  flit_t out_flit  [NUM_PORTS];

  noc_router dut (.clk, .rst_n, .my_x(4'd3), .my_y(4'd2), .bypass,
                  .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit);

  int checks = 0, failures = 0;
  int n_bypass = 0, n_routed = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  function automatic int exp_port(input flit_t f);
    if (f.dst_y < 2) return P_NORTH;
    if (f.dst_y > 2) return P_SOUTH;
    if (f.dst_x > 3) return P_EAST;
    if (f.dst_x < 3) return P_WEST;
    return P_LOCAL;
  endfunction

  // destination that leaves on port o
  function automatic flit_t mk(input int o, input int src, input int seq);
    flit_t f;
    f = '0;
    f.tag = (85)'({src[7:0], seq[23:0], $urandom});
    f.line = 25'($urandom);
    unique case (o)
      P_NORTH: begin f.dst_y = 4'($urandom_range(0, 1)); f.dst_x = 4'($urandom_range(0, 7)); end
      P_SOUTH: begin f.dst_y = 4'($urandom_range(3, 6)); f.dst_x = 4'($urandom_range(0, 7)); end
      P_EAST:  begin f.dst_y = 4'd2; f.dst_x = 4'($urandom_range(4, 7)); end
      P_WEST:  begin f.dst_y = 4'd2; f.dst_x = 4'($urandom_range(0, 2)); end
      default: begin f.dst_y = 4'd2; f.dst_x = 4'd3; end
    endcase
    f.src_x = 4'(src);
    return f;
  endfunction

  flit_t expq [NUM_PORTS][NUM_PORTS][$];   // [input][output]
  bit    rand_ready = 1'b0;

  always @(posedge clk) #1 begin
    for (int o = 0; o < NUM_PORTS; o++) out_ready[o] = rand_ready ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  // output monitor: sampled at the edge, compared against the queues
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NUM_PORTS; o++)
      if (out_valid[o] && out_ready[o]) begin
        int src;
        src = int'(out_flit[o].src_x);
        check(exp_port(out_flit[o]) == o || (bypass && o == P_NORTH),
              $sformatf("flit for (%0d,%0d) left on port %0d", out_flit[o].dst_x, out_flit[o].dst_y, o));
        if (src < NUM_PORTS && expq[src][o].size() > 0) begin
          check(out_flit[o] == expq[src][o][0], $sformatf("order/content %0d->%0d", src, o));
          void'(expq[src][o].pop_front());
        end else check(1'b0, $sformatf("unexpected flit on port %0d", o));
        if (bypass) n_bypass++; else n_routed++;
      end
  end

  task automatic send(input int i, input flit_t f);
    bit took;
    in_valid[i] = 1'b1; in_flit[i] = f;
    do begin
      took = in_ready[i];      // sampled before the edge that may accept it
      @(negedge clk);
    end while (!took);
  endtask

  // 400 flits from input ii to random outputs, with random gaps
  task automatic stream(input int ii);
    for (int s = 1; s <= 400; s++) begin
      int o;
      flit_t f;
      do o = $urandom_range(0, NUM_PORTS - 1); while (o == ii && o != P_LOCAL);
      f = mk(o, ii, s);
      expq[ii][o].push_back(f);
      send(ii, f);
      in_valid[ii] = 1'b0;
      if ($urandom_range(0, 2) == 0) @(negedge clk);
    end
  endtask

  initial begin
    for (int i = 0; i < NUM_PORTS; i++) begin
      in_valid[i] = 1'b0; in_flit[i] = '0; out_ready[i] = 1'b1;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // 1. latency of a lone flit
    for (int i = 0; i < NUM_PORTS; i++)
      for (int o = 0; o < NUM_PORTS; o++) begin
        flit_t f;
        int n;
        if (i == o && o != P_LOCAL) continue;  // no U-turns
        f = mk(o, i, 0);
        expq[i][o].push_back(f);
        in_valid[i] = 1'b1; in_flit[i] = f;
        check(in_ready[i], "idle router not ready");
        @(negedge clk);            // accepted at this edge
        in_valid[i] = 1'b0;
        n = 0;
        while (!out_valid[o] && n < 10) begin n++; @(negedge clk); end
        check(n == 1, $sformatf("hop %0d->%0d: output after %0d edges, expected 2", i, o, n + 1));
        @(negedge clk);
      end
    // 2. random traffic
    rand_ready = 1'b1;
    fork
      stream(0);
      stream(1);
      stream(2);
      stream(3);
      stream(4);
    join
    rand_ready = 1'b0;
    repeat (20) @(negedge clk);
    for (int i = 0; i < NUM_PORTS; i++)
      for (int o = 0; o < NUM_PORTS; o++)
        check(expq[i][o].size() == 0, $sformatf("%0d flits %0d->%0d lost", expq[i][o].size(), i, o));
    // 3. bypass
    bypass = 1'b1;
    @(negedge clk);
    for (int i = 0; i < NUM_PORTS; i++)
      check(in_ready[i] == (i == P_SOUTH), $sformatf("port %0d ready in bypass", i));
    begin
      flit_t f;
      int n;
      f = mk(P_NORTH, P_SOUTH, 0);
      expq[P_SOUTH][P_NORTH].push_back(f);
      in_valid[P_SOUTH] = 1'b1; in_flit[P_SOUTH] = f;
      @(negedge clk);
      in_valid[P_SOUTH] = 1'b0;
      n = 0;
      while (!out_valid[P_NORTH] && n < 10) begin n++; @(negedge clk); end
      check(n == 0, $sformatf("bypass hop: output after %0d edges, expected 1", n + 1));
      @(negedge clk);
    end
    rand_ready = 1'b1;
    for (int s = 1; s <= 300; s++) begin
      flit_t f;
      f = mk(P_NORTH, P_SOUTH, s);
      expq[P_SOUTH][P_NORTH].push_back(f);
      send(P_SOUTH, f);
      in_valid[P_SOUTH] = 1'b0;
    end
    rand_ready = 1'b0;
    repeat (20) @(negedge clk);
    check(expq[P_SOUTH][P_NORTH].size() == 0, "bypass flits lost");
    check(n_bypass > 200 && n_routed > 1000, $sformatf("coverage %0d %0d", n_bypass, n_routed));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

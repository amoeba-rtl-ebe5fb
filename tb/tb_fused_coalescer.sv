// tb_fused_coalescer: sends random warp memory instructions (addresses drawn
// from a few cache lines, random active masks) to the coalescers of an SM
// pair, split and fused, with random back-pressure on the request outputs.
// For every instruction the bench checks that the requests cover exactly the
// active lanes, that the lane masks do not overlap, that every lane in a
// mask lies in the request's line, that the number of requests equals the
// number of distinct lines touched, that `out_last` marks the final request,
// and that, with no back-pressure, N requests take N cycles. Fused, the two
// halves of a 64-thread warp enter together and one request serves both
// halves when they touch the same line: the bench counts such merged
// requests and fails if none occurred. The thread-access and request
// counters are summed and compared with the bench's totals.
module tb_fused_coalescer;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                   fused = 1'b0;
  logic [1:0]             in_valid = '0, in_store = '0, out_ready = '0;
  logic [1:0]             in_ready, out_valid, out_store, out_last, req_count;
  logic [ADDR_W-1:0]      in_addr [2][WARP_SIZE];
  logic [WARP_SIZE-1:0]   in_active [2];
  logic [LINE_ADDR_W-1:0] out_line [2];
  logic [FUSED_WARP-1:0]  out_mask [2];
  logic [6:0]             thread_acc;

  fused_coalescer dut (.*);

  int checks = 0, failures = 0;
  int n_merged = 0, sum_acc = 0, sum_req = 0, exp_acc = 0, exp_req = 0;
  bit backpressure = 1'b0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    sum_acc += int'(thread_acc);
    sum_req += int'(req_count);
  end

  // drives out_ready randomly when back-pressure is on
  always @(posedge clk) #1 out_ready = backpressure ? 2'($urandom) : 2'b11;

  // one instruction on unit u; lanes: 64 when fused (both ports), 32 otherwise
  task automatic instr(input int u);
    logic [ADDR_W-1:0]     a [FUSED_WARP];
    logic [FUSED_WARP-1:0] act, seen;
    logic [LINE_ADDR_W-1:0] lines [$];
    int nl, nreq, cycles, lanes;
    bit st, found;
    lanes = fused ? FUSED_WARP : WARP_SIZE;
    act = '0;
    for (int i = 0; i < lanes; i++) begin
      a[i]   = ADDR_W'($urandom_range(0, 5)) * 128 + ADDR_W'($urandom_range(0, 127)) + 32'h1000_0000;
      act[i] = ($urandom_range(0, 9) < 8);
    end
    if (fused) for (int i = 0; i < WARP_SIZE; i++) a[i + WARP_SIZE] = a[i] + ((i % 2) ? 0 : 128 * 8);
    st = 1'($urandom);
    // distinct lines
    nl = 0;
    for (int i = 0; i < lanes; i++) if (act[i]) begin
      found = 0;
      foreach (lines[k]) if (lines[k] == a[i][ADDR_W-1:OFFSET_W]) found = 1;
      if (!found) lines.push_back(a[i][ADDR_W-1:OFFSET_W]);
    end
    nl = lines.size();
    exp_acc += $countones(act);
    exp_req += nl;
    // present
    if (fused) begin
      for (int i = 0; i < WARP_SIZE; i++) begin
        in_addr[0][i] = a[i]; in_addr[1][i] = a[i + WARP_SIZE];
      end
      in_active[0] = act[WARP_SIZE-1:0]; in_active[1] = act[FUSED_WARP-1:WARP_SIZE];
      in_store = {st, st};
      in_valid = 2'b11;
    end else begin
      for (int i = 0; i < WARP_SIZE; i++) in_addr[u][i] = a[i];
      in_active[u] = act[WARP_SIZE-1:0];
      in_store[u] = st;
      in_valid[u] = 1'b1;
    end
    while (!in_ready[u]) @(negedge clk);
    @(negedge clk);
    if (fused) in_valid = 2'b00; else in_valid[u] = 1'b0;
    // collect
    seen = '0; nreq = 0; cycles = 0;
    while (nreq < nl + 1 && cycles < 500) begin
      if (!out_valid[u]) break;
      cycles++;
      if (out_ready[u]) begin
        nreq++;
        check((seen & out_mask[u]) == '0, "overlapping lane masks");
        seen |= out_mask[u];
        for (int i = 0; i < lanes; i++)
          if (out_mask[u][u == 1 ? i + WARP_SIZE : i])
            check(a[i][ADDR_W-1:OFFSET_W] == out_line[u], "lane outside the request line");
        if (fused && out_mask[u][WARP_SIZE-1:0] != '0 && out_mask[u][FUSED_WARP-1:WARP_SIZE] != '0)
          n_merged++;
        check(out_store[u] == st, "store flag");
        check(out_last[u] == (nreq == nl), "out_last");
      end
      @(negedge clk);
    end
    check(nreq == nl, $sformatf("%0d requests for %0d lines", nreq, nl));
    if (u == 1) seen = seen >> WARP_SIZE;
    check(seen == act, "requests do not cover the active lanes");
    if (!backpressure) check(cycles == nl, $sformatf("%0d cycles for %0d requests", cycles, nl));
  endtask

  initial begin
    for (int p = 0; p < 2; p++) begin
      in_active[p] = '0;
      for (int i = 0; i < WARP_SIZE; i++) in_addr[p][i] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int phase = 0; phase < 4; phase++) begin
      fused = phase[0];
      backpressure = phase[1];
      @(negedge clk);
      for (int t = 0; t < 200; t++) begin
        if (fused) instr(0);
        else begin
          fork
            instr(0);
            instr(1);
          join
        end
      end
    end
    repeat (2) @(negedge clk);
    check(sum_acc == exp_acc, $sformatf("thread accesses %0d expected %0d", sum_acc, exp_acc));
    check(sum_req == exp_req, $sformatf("requests %0d expected %0d", sum_req, exp_req));
    check(n_merged > 0, "no request served both halves of a fused warp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

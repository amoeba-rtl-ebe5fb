// tb_fused_l1_cache: random loads, stores and refills on a small pool of lines
// that map to two sets, so that sets overflow and lines are replaced. A
// reference cache model in the bench follows the same policies (per-bank
// round-robin replacement, bank toggle per set on fused refills, in-place
// refill of a present line, write-evict stores). The bench runs split (both
// ports active, one cycle latency), then fused (port 0 only, two cycle
// latency, eight ways per set), then split again, and checks every
// response's timing, hit flag, line and data. It also counts fused hits that
// only the doubled associativity makes possible (more than four lines of a
// set resident), and fails if there are none.
module tb_fused_l1_cache;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int LA = LINE_ADDR_W;
  localparam int LB = LINE_BITS;

  logic          fused = 1'b0;
  logic [1:0]    req_valid = '0, req_store = '0, fill_valid = '0;
  logic [LA-1:0] req_line [2];
  logic [LA-1:0] fill_line [2];
  logic [LB-1:0] fill_data [2];
  logic [1:0]    resp_valid, resp_hit, resp_store;
  logic [LA-1:0] resp_line [2];
  logic [LB-1:0] resp_data [2];

  fused_l1_cache dut (.*);

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_evict = 0, n_wide_hit = 0, n_fused_resp = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // ---------------------------------------------------------- reference model
  bit            m_vld  [2][32][4];
  logic [LA-6:0] m_tag  [2][32][4];
  logic [LB-1:0] m_data [2][32][4];
  int            m_rr   [2][32];
  bit            m_bsel [32];

  function automatic int find(input int b, input logic [LA-1:0] l);
    for (int w = 0; w < 4; w++)
      if (m_vld[b][l[4:0]][w] && m_tag[b][l[4:0]][w] == l[LA-1:5]) return w;
    return -1;
  endfunction

  function automatic int resident(input int s);
    int n = 0;
    for (int b = 0; b < 2; b++) for (int w = 0; w < 4; w++) n += int'(m_vld[b][s][w]);
    return n;
  endfunction

  // expected responses: due cycle, port
  typedef struct { int due; int port; bit hit; logic [LA-1:0] line; logic [LB-1:0] data; bit store; } exp_t;
  exp_t exp_q [$];
  int   cyc = 0;

  function automatic logic [LA-1:0] pick_line();
    logic [LA-1:0] l;
    l = '0;
    l[4:0]  = 5'($urandom_range(0, 1) * 7);          // sets 0 and 7
    l[LA-1:5] = (LA-5)'($urandom_range(0, 9));      // 10 tags per set
    return l;
  endfunction

  task automatic step(input int phase);
    int            w, b, s;
    int            fb [2], fw [2];
    bit            hitv;
    logic [LB-1:0] d;
    exp_t          e;
    // choose operations for this cycle
    for (int p = 0; p < 2; p++) begin
      req_valid[p]  = 1'b0;
      fill_valid[p] = 1'b0;
      if (fused && p == 1) continue;
      req_line[p]  = pick_line();
      fill_line[p] = pick_line();
      fill_data[p] = {32{$urandom}};
      req_valid[p]  = ($urandom_range(0, 99) < 60);
      req_store[p]  = ($urandom_range(0, 99) < 15);
      fill_valid[p] = ($urandom_range(0, 99) < 35);
    end
    // lookups see the state before this edge
    for (int p = 0; p < 2; p++) begin
      if (!req_valid[p]) continue;
      hitv = 1'b0; d = '0;
      if (fused) begin
        w = find(0, req_line[p]);
        if (w >= 0) begin hitv = 1'b1; d = m_data[0][req_line[p][4:0]][w]; end
        else begin
          w = find(1, req_line[p]);
          if (w >= 0) begin hitv = 1'b1; d = m_data[1][req_line[p][4:0]][w]; end
        end
        if (hitv && resident(req_line[p][4:0]) > 4) n_wide_hit++;
      end else begin
        w = find(p, req_line[p]);
        if (w >= 0) begin hitv = 1'b1; d = m_data[p][req_line[p][4:0]][w]; end
      end
      e.due = cyc + (fused ? 2 : 1); e.port = p; e.hit = hitv;
      e.line = req_line[p]; e.data = d; e.store = req_store[p];
      exp_q.push_back(e);
      if (hitv) n_hit++; else n_miss++;
    end
    // refill targets are chosen on the state before this edge's evictions
    for (int f = 0; f < 2; f++) begin
      fb[f] = -1;
      if (!fill_valid[f]) continue;
      s = fill_line[f][4:0];
      if (fused) begin
        if (find(0, fill_line[f]) >= 0)      begin b = 0; w = find(0, fill_line[f]); end
        else if (find(1, fill_line[f]) >= 0) begin b = 1; w = find(1, fill_line[f]); end
        else begin
          b = int'(m_bsel[s]); w = m_rr[b][s];
          m_rr[b][s] = (m_rr[b][s] + 1) % 4;
          m_bsel[s] = !m_bsel[s];
        end
      end else begin
        b = f;
        w = find(b, fill_line[f]);
        if (w < 0) begin w = m_rr[b][s]; m_rr[b][s] = (m_rr[b][s] + 1) % 4; end
      end
      fb[f] = b; fw[f] = w;
    end
    // write-evict
    for (int p = 0; p < 2; p++)
      if (req_valid[p] && req_store[p])
        for (b = 0; b < 2; b++)
          if (fused || b == p) begin
            w = find(b, req_line[p]);
            if (w >= 0) begin m_vld[b][req_line[p][4:0]][w] = 1'b0; n_evict++; end
          end
    // refills win over an eviction of the same cycle
    for (int f = 0; f < 2; f++) begin
      if (fb[f] < 0) continue;
      s = fill_line[f][4:0];
      m_vld[fb[f]][s][fw[f]]  = 1'b1;
      m_tag[fb[f]][s][fw[f]]  = fill_line[f][LA-1:5];
      m_data[fb[f]][s][fw[f]] = fill_data[f];
    end
  endtask

  // compare the outputs seen after each edge with what is due
  task automatic check_outputs();
    bit due [2];
    due = '{0, 0};
    foreach (exp_q[i]) begin
      if (exp_q[i].due == cyc) begin
        int p;
        p = exp_q[i].port;
        due[p] = 1'b1;
        check(resp_valid[p] == 1'b1, $sformatf("port %0d: no response at cycle %0d", p, cyc));
        check(resp_hit[p] == exp_q[i].hit, $sformatf("port %0d line %h: hit %0b expected %0b",
                                                     p, exp_q[i].line, resp_hit[p], exp_q[i].hit));
        check(resp_line[p] == exp_q[i].line && resp_store[p] == exp_q[i].store, "line/store");
        if (exp_q[i].hit) check(resp_data[p] == exp_q[i].data, "hit data");
        if (fused) n_fused_resp++;
      end
    end
    for (int p = 0; p < 2; p++)
      if (!due[p]) check(resp_valid[p] == 1'b0, $sformatf("port %0d: unexpected response", p));
    while (exp_q.size() > 0 && exp_q[0].due <= cyc) void'(exp_q.pop_front());
  endtask

  initial begin
    for (int p = 0; p < 2; p++) begin
      req_line[p] = '0; fill_line[p] = '0; fill_data[p] = '0;
    end
    for (int b = 0; b < 2; b++) for (int s = 0; s < 32; s++) begin
      m_rr[b][s] = 0; m_bsel[s] = 1'b0;
      for (int w = 0; w < 4; w++) begin m_vld[b][s][w] = 1'b0; m_tag[b][s][w] = '0; m_data[b][s][w] = '0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int phase = 0; phase < 3; phase++) begin
      fused = (phase == 1);
      for (int t = 0; t < 3000; t++) begin
        step(phase);
        @(negedge clk);
        cyc++;
        check_outputs();
      end
      // drain before changing mode
      req_valid = '0; fill_valid = '0;
      repeat (3) begin @(negedge clk); cyc++; check_outputs(); end
    end
    check(n_wide_hit > 0, $sformatf("%0d fused hits beyond four ways", n_wide_hit));
    check(n_hit > 100 && n_miss > 100 && n_evict > 10 && n_fused_resp > 100,
          $sformatf("coverage hit %0d miss %0d evict %0d", n_hit, n_miss, n_evict));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cta_profiler: drives random per-cycle events into the profiler for a
// random-length CTA, keeps its own event totals, and checks every metric of
// the result against (num << 16) / den computed here (0 for a zero
// denominator, saturated to 24 bits), the peak-CTA metric, that `profiling`
// is high exactly while counting, and that `valid` comes 459 cycles after
// the clock edge that samples `cta_done`. Includes runs with zero
// denominators and with a NoC latency that saturates the Q8.16 metric.
module tb_cta_profiler;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start = 1'b0, cta_done = 1'b0;
  prof_events_t ev;
  logic         profiling, valid;
  metric_t      metrics [NUM_METRICS];

  cta_profiler dut (.*);

  int checks = 0, failures = 0;

  function automatic longint frac(longint n, longint d);
    longint q;
    if (d == 0) return 0;
    q = (n << 16) / d;
    return (q > 64'hFFFFFF) ? 64'hFFFFFF : q;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic run(input int ncyc, input int mode);
    longint cyc, idle, inst, ld, st, mt, ma, da, dm, ia, im, ca, cm, mm, np, nl;
    int     peak, lat;
    longint expv [NUM_METRICS];
    {cyc, idle, inst, ld, st, mt, ma, da, dm, ia, im, ca, cm, mm, np, nl} = '0;
    peak = 0;
    ev = '0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    for (int k = 1; k <= ncyc; k++) begin
      check(profiling == 1'b1, "profiling low while counting");
      ev.ctrl_idle  = 1'($urandom);
      ev.inst       = 2'($urandom);
      ev.ld_inst    = 1'($urandom);
      ev.st_inst    = 1'($urandom);
      ev.mem_thread = 7'($urandom_range(0, 64));
      ev.mem_actual = 2'($urandom);
      ev.l1d_acc    = 2'($urandom);
      ev.l1d_miss   = 2'($urandom_range(0, 32'(ev.l1d_acc)));
      ev.l1i_acc    = 1'($urandom);
      ev.l1i_miss   = ev.l1i_acc & 1'($urandom);
      ev.l1c_acc    = 1'($urandom);
      ev.l1c_miss   = ev.l1c_acc & 1'($urandom);
      ev.mshr_merge = 1'($urandom);
      ev.noc_pkt    = 1'($urandom);
      ev.noc_lat    = 16'($urandom_range(5, 200));
      ev.cta_active = 4'($urandom_range(1, 8));
      if (mode == 1) begin          // nothing happens: all denominators zero
        ev = '0;
      end else if (mode == 2) begin // very long packet latencies: saturate
        ev.noc_pkt = 1'b1;
        ev.noc_lat = 16'hFFFF;
      end
      cyc++;
      idle += ev.ctrl_idle; inst += ev.inst; ld += ev.ld_inst; st += ev.st_inst;
      mt += ev.mem_thread; ma += ev.mem_actual; da += ev.l1d_acc; dm += ev.l1d_miss;
      ia += ev.l1i_acc; im += ev.l1i_miss; ca += ev.l1c_acc; cm += ev.l1c_miss;
      mm += ev.mshr_merge;
      if (ev.noc_pkt) begin np++; nl += ev.noc_lat; end
      if (k != ncyc && int'(ev.cta_active) > peak) peak = int'(ev.cta_active);
      cta_done = (k == ncyc);
      @(negedge clk);
    end
    cta_done = 1'b0;
    ev = '0;
    lat = 0;
    while (!valid && lat < 2000) begin
      check(profiling == 1'b0, "profiling high after cta_done");
      lat++;
      @(negedge clk);
    end
    // lat = clock edges after the one that sampled cta_done
    check(lat == 459, $sformatf("valid latency %0d, expected 459", lat));
    expv[M_CONC_CTA]   = longint'(peak) << 16;
    expv[M_CTRL_DIV]   = frac(idle, cyc);
    expv[M_COALESCE]   = frac(ma, mt);
    expv[M_L1D_MISS]   = frac(dm, da);
    expv[M_L1I_MISS]   = frac(im, ia);
    expv[M_L1C_MISS]   = frac(cm, ca);
    expv[M_MSHR]       = frac(mm, dm);
    expv[M_LOAD_RATE]  = frac(ld, inst);
    expv[M_STORE_RATE] = frac(st, inst);
    expv[M_NOC]        = frac(nl, np);
    for (int i = 0; i < NUM_METRICS; i++)
      check(longint'(metrics[i]) == expv[i],
            $sformatf("metric %0d = %h, expected %h (mode %0d)", i, metrics[i], expv[i], mode));
    @(negedge clk);
    check(valid == 1'b0, "valid longer than one cycle");
  endtask

  initial begin
    ev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(profiling == 1'b0 && valid == 1'b0, "idle after reset");
    run(200, 0);
    run(1, 1);
    run(50, 2);
    for (int t = 0; t < 20; t++) run($urandom_range(2, 400), 0);
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

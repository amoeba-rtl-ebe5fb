// tb_scalability_predictor: checks the regression MAC against a reference
// computed here with 64-bit integers, for random metric vectors and for two
// hand-made profiles (a coalescing-bound kernel that must fuse and a
// load/store-heavy kernel that must stay scale-out). Also checks the latency
// (11 cycles from start to done).
module tb_scalability_predictor;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic    start = 1'b0;
  metric_t metrics [NUM_METRICS];
  logic    busy, done, fuse;
  logic signed [ACC_W-1:0] logit;

  scalability_predictor dut (.*);

  int checks = 0, failures = 0;

  // coefficients written out again, as real numbers, from the model table
  real coef_r [NUM_METRICS] = '{1.414, 444.628, 2057.050, -313.838, 1674.513,
                                -67.277, -102.971, -680.786, -804.7, -8.301};
  real const_r = -73.635;

  task automatic run(input metric_t m [NUM_METRICS], input string name);
    longint exp_acc;
    real    exp_real;
    int     cyc;
    exp_acc  = longint'(-75402) <<< 16;
    exp_real = const_r;
    for (int i = 0; i < NUM_METRICS; i++) begin
      exp_acc  += longint'($rtoi($floor(coef_r[i] * 1024.0 + 0.5))) * longint'(m[i]);
      exp_real += coef_r[i] * (real'(m[i]) / 65536.0);
    end
    metrics = m;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 0;   // edges counted after the one that sampled start
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 100) break;
    end
    checks++;
    if (cyc != 11) begin
      failures++;
      $display("FAIL %s: latency %0d, expected 11", name, cyc);
    end
    checks++;
    if (logit != ACC_W'(exp_acc)) begin
      failures++;
      $display("FAIL %s: logit %0d expected %0d", name, logit, exp_acc);
    end
    checks++;
    if (fuse != (exp_acc > 0)) begin
      failures++;
      $display("FAIL %s: fuse %0b", name, fuse);
    end
    // the fixed-point sum must agree with the real-valued model in sign
    // unless the real logit is within rounding distance of zero
    if (exp_real > 0.05 || exp_real < -0.05) begin
      checks++;
      if (fuse != (exp_real > 0.0)) begin
        failures++;
        $display("FAIL %s: fuse %0b but real logit %f", name, fuse, exp_real);
      end
    end
  endtask

  metric_t m [NUM_METRICS];
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // coalescing-bound kernel: every thread access leaves as its own request
    foreach (m[i]) m[i] = '0;
    m[M_CONC_CTA]  = 24'd8 << 16;
    m[M_COALESCE]  = 24'h010000;   // 1.0
    m[M_L1D_MISS]  = 24'h008000;   // 0.5
    m[M_LOAD_RATE] = 24'h003333;   // 0.2
    m[M_NOC]       = 24'd20 << 16; // 20 cycles
    run(m, "coalescing-bound");
    checks++;
    if (!fuse) begin failures++; $display("FAIL coalescing-bound kernel not fused"); end
    // load/store-heavy, well coalesced kernel
    foreach (m[i]) m[i] = '0;
    m[M_CONC_CTA]   = 24'd4 << 16;
    m[M_COALESCE]   = 24'h000800;  // 1/32
    m[M_LOAD_RATE]  = 24'h004000;  // 0.25
    m[M_STORE_RATE] = 24'h002000;  // 0.125
    m[M_NOC]        = 24'd40 << 16;
    run(m, "scale-out");
    checks++;
    if (fuse) begin failures++; $display("FAIL load/store-heavy kernel fused"); end
    // random vectors
    for (int t = 0; t < 200; t++) begin
      foreach (m[i]) m[i] = metric_t'($urandom_range(0, 32'h10000));
      m[M_CONC_CTA] = metric_t'($urandom_range(0, 8)) << 16;
      m[M_NOC]      = metric_t'($urandom_range(0, 255)) << 16;
      run(m, "random");
    end
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

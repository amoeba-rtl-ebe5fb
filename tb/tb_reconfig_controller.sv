// tb_reconfig_controller: runs three kernels through the reconfiguration loop.
// Kernel A's profiled CTA is coalescing-bound (every thread access becomes its
// own memory request) and must be fused; kernel B is a well-coalesced,
// load-heavy kernel and must stay scale-out; kernel C repeats A. For each
// kernel the bench checks that the SMs run scale-out while the CTA is
// profiled, that the decision arrives on the 472nd edge after `cta_done`
// is sampled, that the mode then holds for the rest of the kernel
// (later cta_done pulses are ignored), and that a new kernel returns the
// pairs to scale-out with a `reconfig` pulse when they were fused.
module tb_reconfig_controller;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         kernel_start = 1'b0, kernel_done = 1'b0, cta_done = 1'b0;
  prof_events_t ev;
  logic         fuse_mode, reconfig, decision_valid, profiling;
  logic signed [ACC_W-1:0] logit;
  metric_t      metrics [NUM_METRICS];

  reconfig_controller dut (.*);

  int checks = 0, failures = 0;
  int n_reconfig = 0;

  always @(posedge clk) if (rst_n && reconfig) n_reconfig++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // kind 0: coalescing-bound, kind 1: load-heavy and coalesced
  task automatic kernel(input int kind, input bit expect_fuse);
    int lat;
    bit was_fused;
    was_fused = fuse_mode;
    @(negedge clk) kernel_start = 1'b1;
    @(negedge clk) kernel_start = 1'b0;
    check(fuse_mode == 1'b0, "kernel did not start scale-out");
    check(reconfig == was_fused, "reconfig pulse on kernel start");
    check(profiling == 1'b1, "not profiling after kernel start");
    for (int k = 0; k < 300; k++) begin
      ev = '0;
      ev.inst       = 2'd1;
      ev.cta_active = 4'd4;
      if (kind == 0) begin
        ev.mem_thread = 7'd1;
        ev.mem_actual = 2'd1;
        ev.ld_inst    = (k % 8 == 0);
      end else begin
        ev.mem_thread = 7'd32;
        ev.mem_actual = 2'd1;
        ev.ld_inst    = 1'b1;
        ev.st_inst    = (k % 2 == 0);
      end
      ev.noc_pkt = (k % 4 == 0);
      ev.noc_lat = 16'd30;
      cta_done   = (k == 299);
      @(negedge clk);
      check(fuse_mode == 1'b0, "mode changed while profiling");
    end
    cta_done = 1'b0;
    ev = '0;
    lat = 0;
    while (!decision_valid && lat < 1000) begin
      lat++;
      @(negedge clk);
    end
    check(lat == 472, $sformatf("decision %0d edges after cta_done, expected 472", lat));
    check(fuse_mode == expect_fuse, $sformatf("kernel kind %0d: fuse_mode %0b", kind, fuse_mode));
    check(reconfig == expect_fuse, "reconfig pulse with the decision");
    check((logit > 0) == expect_fuse, "logit sign");
    // later CTAs of the same kernel do not disturb the mode
    repeat (20) @(negedge clk);
    cta_done = 1'b1;
    @(negedge clk) cta_done = 1'b0;
    repeat (600) begin
      @(negedge clk);
      if (decision_valid || fuse_mode != expect_fuse) begin
        check(1'b0, "mode changed during the kernel");
        break;
      end
    end
    checks++;
    kernel_done = 1'b1;
    @(negedge clk) kernel_done = 1'b0;
    check(fuse_mode == expect_fuse, "mode kept until the next kernel");
  endtask

  initial begin
    ev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(fuse_mode == 1'b0 && !profiling, "idle scale-out after reset");
    kernel(0, 1'b1);
    kernel(1, 1'b0);
    kernel(0, 1'b1);
    kernel(1, 1'b0);
    check(n_reconfig == 4, $sformatf("%0d reconfig pulses, expected 4", n_reconfig));
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

// tb_fused_issue: random scoreboard-ready vectors for both SMs of a pair,
// with the pair switching between split and fused every few hundred cycles.
// A greedy-then-oldest reference scheduler per SM runs in the bench. Checks:
// split, each datapath issues its own SM's choice; fused, a warp is only
// issued when both halves are ready, the same warp goes to both datapaths in
// the same cycle, SM1's own scheduler is silent, and `dp1_from_sm0` is set.
// Also counts cycles where a warp ready on only one side was held back.
module tb_fused_issue;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        fused = 1'b0;
  logic [31:0] ready0 = '0, ready1 = '0;
  logic        dp0_valid, dp1_valid, dp1_from_sm0;
  logic [4:0]  dp0_warp, dp1_warp;

  fused_issue dut (.*);

  int checks = 0, failures = 0;
  int n_fused_issue = 0, n_split_issue = 0, n_held = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // reference GTO state
  int  last0 = -1, last1 = -1;

  function automatic int gto(input logic [31:0] r, input int last);
    if (last >= 0 && r[last]) return last;
    for (int i = 0; i < 32; i++) if (r[i]) return i;
    return -1;
  endfunction

  initial begin
    int e0, e1;
    logic [31:0] r0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      if (t % 300 == 0) fused = ~fused;
      ready0 = $urandom & $urandom;
      ready1 = $urandom & $urandom;
      if (t % 11 == 0) ready0 = '0;
      if (t % 13 == 0) ready1 = ready0;
      #1;
      r0 = fused ? (ready0 & ready1) : ready0;
      e0 = gto(r0, last0);
      e1 = fused ? -1 : gto(ready1, last1);
      check(dp0_valid == (e0 >= 0), "dp0_valid");
      if (e0 >= 0) check(int'(dp0_warp) == e0, $sformatf("dp0 warp %0d expected %0d", dp0_warp, e0));
      check(dp1_from_sm0 == fused, "dp1_from_sm0");
      if (fused) begin
        check(dp1_valid == dp0_valid && (!dp0_valid || dp1_warp == dp0_warp), "lockstep");
        if (e0 >= 0) n_fused_issue++;
        if ((ready0 ^ ready1) != '0 && e0 < 0) n_held++;
      end else begin
        check(dp1_valid == (e1 >= 0), "dp1_valid");
        if (e1 >= 0) check(int'(dp1_warp) == e1, $sformatf("dp1 warp %0d expected %0d", dp1_warp, e1));
        if (e0 >= 0 || e1 >= 0) n_split_issue++;
      end
      if (e0 >= 0) last0 = e0;
      if (e1 >= 0) last1 = e1;
      @(negedge clk);
    end
    check(n_fused_issue > 100 && n_split_issue > 100 && n_held > 10,
          $sformatf("coverage %0d %0d %0d", n_fused_issue, n_split_issue, n_held));
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

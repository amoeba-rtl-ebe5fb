// tb_warp_regroup: feeds one fused warp per cycle with random active and
// waiting-on-miss masks (biased so that both sides of the threshold occur)
// and checks the registered result one cycle later against a reference that
// scores each 8-thread group, sums the scores into Si, compares Si with the
// threshold, and picks the slow half-warp by repeatedly taking the
// highest-scoring remaining group (lowest index on ties). Direct-split mode
// must always name groups 4..7 as slow.
module tb_warp_regroup;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  regroup = 1'b1, in_valid = 1'b0;
  logic [WID_W-1:0]      in_warp = '0;
  logic [FUSED_WARP-1:0] in_active = '0, in_slow = '0;
  logic                  out_valid, mem_div;
  logic [WID_W-1:0]      out_warp;
  logic [6:0]            out_si;
  logic [NUM_GROUPS-1:0] slow_groups;

  warp_regroup dut (.*);

  int checks = 0, failures = 0;
  int n_div = 0, n_nodiv = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    logic [FUSED_WARP-1:0] a, s;
    logic [WID_W-1:0]      w;
    logic                  rg;
    int                    sc [NUM_GROUPS];
    int                    si, best;
    logic [NUM_GROUPS-1:0] exp_slow;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(out_valid == 1'b0, "out_valid after reset");
    for (int t = 0; t < 2000; t++) begin
      a  = {$urandom, $urandom};
      if (t % 5 == 0) a = '1;
      s  = {$urandom, $urandom};
      if (t % 3 == 0) s = s & {$urandom, $urandom} & {$urandom, $urandom};
      w  = WID_W'($urandom);
      rg = (t % 4 != 3);
      in_valid  = 1'b1;
      in_active = a;
      in_slow   = s;
      in_warp   = w;
      regroup   = rg;
      @(negedge clk);
      in_valid = 1'b0;
      // reference
      si = 0;
      for (int g = 0; g < NUM_GROUPS; g++) begin
        sc[g] = 0;
        for (int k = 0; k < GROUP_SIZE; k++)
          sc[g] += int'(a[g*GROUP_SIZE+k] & s[g*GROUP_SIZE+k]);
        si += sc[g];
      end
      exp_slow = '0;
      for (int n = 0; n < NUM_GROUPS / 2; n++) begin
        best = -1;
        for (int g = 0; g < NUM_GROUPS; g++)
          if (!exp_slow[g] && (best < 0 || sc[g] > sc[best])) best = g;
        exp_slow[best] = 1'b1;
      end
      if (!rg) exp_slow = 8'hF0;
      check(out_valid == 1'b1, "no result one cycle after the request");
      check(out_warp == w, "warp id");
      check(int'(out_si) == si, $sformatf("Si %0d expected %0d", out_si, si));
      check(mem_div == (si >= 16), "threshold test");
      check(slow_groups == exp_slow,
            $sformatf("slow groups %b expected %b (regroup %0b)", slow_groups, exp_slow, rg));
      if (si >= 16) n_div++; else n_nodiv++;
      if (t % 7 == 0) begin
        @(negedge clk);
        check(out_valid == 1'b0, "out_valid without request");
      end
    end
    check(n_div > 100 && n_nodiv > 100, $sformatf("coverage: %0d divergent, %0d not", n_div, n_nodiv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

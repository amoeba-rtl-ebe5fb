// tb_divergent_warp_queue: random push/pop traffic against a queue model kept
// in the bench. Checks the head entry, empty/full/count every cycle, that a
// push into a full queue is refused (the bench never does it while full),
// simultaneous push and pop, filling to all 32 entries, and `clear`.
module tb_divergent_warp_queue;
  import amoeba_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       clear = 1'b0, push = 1'b0, pop = 1'b0;
  div_entry_t push_data = '0;
  div_entry_t head;
  logic       full, empty;
  logic [5:0] count;

  divergent_warp_queue dut (.*);

  int checks = 0, failures = 0;
  div_entry_t model [$];
  int n_full = 0, n_both = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic compare();
    check(int'(count) == model.size(), $sformatf("count %0d model %0d", count, model.size()));
    check(empty == (model.size() == 0), "empty");
    check(full == (model.size() == 32), "full");
    if (model.size() > 0) check(head == model[0], "head entry");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare();
    for (int t = 0; t < 5000; t++) begin
      int bias;
      bias = (t / 500) % 2 == 0 ? 70 : 30;   // alternate filling and draining
      push = ($urandom_range(0, 99) < bias) && (model.size() < 32);
      pop  = ($urandom_range(0, 99) < 100 - bias) && (model.size() > 0);
      push_data = div_entry_t'($urandom);
      clear = (t % 1237 == 1236);
      @(negedge clk);
      if (clear) model.delete();
      else begin
        if (pop)  void'(model.pop_front());
        if (push) model.push_back(push_data);
      end
      if (push && pop && !clear) n_both++;
      if (model.size() == 32) n_full++;
      push = 1'b0; pop = 1'b0; clear = 1'b0;
      compare();
    end
    check(n_full > 0 && n_both > 0, "coverage of full queue and push+pop");
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

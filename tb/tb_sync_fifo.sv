// Self-checking test of sync_fifo: random push/pop traffic (never pushing when full
// or popping when empty) against a queue model; checks data order, empty/full and
// count every cycle, and that both the full and the empty state are reached.
module tb_sync_fifo;
  import gs_pkg::*;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, empty, full;
  gs_entry_t din = '0, dout;
  logic [4:0] count;
  gs_entry_t q[$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  sync_fifo #(.T(gs_entry_t), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bias;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int cyc = 0; cyc < 8000; cyc++) begin
      bias = (cyc / 500) % 2 == 0 ? 3 : 1;      // alternate filling and draining phases
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == 16), "full flag");
      check(int'(count) == q.size(), $sformatf("count %0d vs %0d", count, q.size()));
      if (q.size() > 0) check(dout == q[0], "head data");
      if (full) n_full++;
      if (empty) n_empty++;
      push = !full && ($urandom % 4) < bias;
      pop  = !empty && ($urandom % 4) >= bias;
      din  = gs_entry_t'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      #1;
    end
    check(n_full > 0, "never full");
    check(n_empty > 0, "never empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

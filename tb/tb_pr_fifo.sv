// tb_pr_fifo: random push/pop (never past full or empty) against a queue model; checks
// order, head visibility, count, full at 4 entries, and simultaneous push and pop.
module tb_pr_fifo;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, head_valid, full;
  logic [15:0] push_row, head_row;
  logic [2:0] count;

  pr_fifo dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  logic [15:0] q [$];
  int full_seen = 0, both_seen = 0;

  initial begin
    push = 0; pop = 0; push_row = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      check(int'(count) == q.size(), "count");
      check(head_valid == (q.size() > 0), "head_valid");
      check(full == (q.size() == 4), "full");
      if (q.size() > 0) check(head_row == q[0], "head row / order");
      if (full) full_seen++;
      pop  = (q.size() > 0) && ($urandom_range(0, 99) < ((t / 500) % 2 ? 70 : 30));
      push = (q.size() < 4 || pop) && ($urandom_range(0, 99) < 50);
      push_row = 16'($urandom);
      if (push && pop) both_seen++;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(push_row);
      @(posedge clk);
    end
    check(full_seen > 0 && both_seen > 0, "full and push+pop cases reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_faw_limiter: issues activations as soon as allowed (and at random) and checks against a
// list of past activation times that at most four fall in any 48-cycle (16 ns) window,
// that can_act is high exactly when a fifth would still respect the window, and that
// can_pair also guarantees the second activation 18 cycles later.
module tb_faw_limiter;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic act, can_act, can_pair;
  faw_limiter dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL t=%0d %s", t, msg); end
  endtask

  int hist [$];
  int t = 0, acts = 0;

  initial begin
    act = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (t = 100; t < 5000; t++) begin
      @(negedge clk);
      begin
        bit exp_act, exp_pair;
        int n;
        exp_act = (hist.size() < 4) || (t - hist[hist.size() - 4] >= 48);
        exp_pair = exp_act && ((hist.size() < 3) || (t + 18 - hist[hist.size() - 3] >= 48));
        check(can_act == exp_act, "can_act");
        check(can_pair == exp_pair, "can_pair");
        act = can_act && ($urandom_range(0, 99) < ((t / 700) % 2 ? 90 : 20));
        if (act) begin hist.push_back(t); acts++; end
        n = 0;
        foreach (hist[k]) if (t - hist[k] < 48) n++;
        check(n <= 4, "more than four activations in tFAW");
        if (hist.size() > 8) void'(hist.pop_front());
      end
      @(posedge clk);
    end
    check(acts > 200, "too few activations");
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

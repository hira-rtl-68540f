// tb_periodic_rc: checks the Refresh Generator's rate (one request per 182 cycles, 60.9 ns rounded down),
// the bank rotation, the deadline now + 556 (4 tRC), that requests owed while the Refresh
// Table refuses them are all delivered later, and the pass-through lookup of the RefPtr Table.
module tb_periodic_rc;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable = 0;
  logic [9:0] now = 0;
  logic req_valid, req_ready;
  logic [3:0] req_bank;
  logic [9:0] req_deadline;
  logic [3:0] rp_q_bank = 0;
  logic [127:0] rp_q_mask = '1;
  logic rp_q_found;
  logic [6:0] rp_q_sa;
  logic [15:0] rp_q_row;
  logic [1:0] rp_adv_valid = 0;
  logic [3:0] rp_adv_bank [2];
  logic [6:0] rp_adv_sa [2];
  logic [31:0] generated;
  logic [4:0] windows_done;

  periodic_rc dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  always_ff @(posedge clk) now <= now + 1'b1;

  int cyc = 0, n_taken = 0, last_take = -1, exp_bank = 0, blocked = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (req_valid && req_ready) begin
      check(int'(req_bank) == exp_bank, "bank rotation");
      check(req_deadline == now + 10'd556, "deadline");
      if (!blocked && last_take >= 0) check(cyc - last_take == 182, $sformatf("period %0d", cyc - last_take));
      exp_bank = (exp_bank + 1) % 16;
      last_take = cyc;
      n_taken++;
    end
  end

  initial begin
    rp_adv_bank[0] = 0; rp_adv_bank[1] = 0; rp_adv_sa[0] = 0; rp_adv_sa[1] = 0;
    req_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); enable = 1;
    repeat (182 * 20) @(posedge clk);
    check(n_taken == 20 || n_taken == 19, $sformatf("count %0d", n_taken));
    // table full for a while: requests are owed, then all delivered
    @(negedge clk); req_ready = 0; blocked = 1;
    begin
      int n_before;
      n_before = n_taken;
      repeat (182 * 3) @(posedge clk);
      check(n_taken == n_before, "request taken while not ready");
      @(negedge clk); req_ready = 1;
      repeat (10) @(posedge clk);
      check(n_taken == n_before + 3 || n_taken == n_before + 4, $sformatf("owed requests delivered %0d", n_taken - n_before));
    end
    check(int'(generated) == n_taken, "generated counter");
    // RefPtr lookup through the controller: fresh table gives subarray 0, row 0
    check(rp_q_found && rp_q_sa == 0 && rp_q_row == 0, "refptr lookup");
    @(negedge clk); rp_q_mask = 128'h4;
    #0 check(rp_q_found && rp_q_sa == 2 && rp_q_row == 16'h0400, "refptr masked lookup");
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

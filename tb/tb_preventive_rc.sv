// tb_preventive_rc: with p_th close to 1, activations in a bank must each produce one
// preventive request: a Refresh Table insert (bank, deadline now + 556) and a PR-FIFO entry
// holding a neighbour of the activated row, in order. Also checks the holding register when
// the PR-FIFO (4 entries) or the table is full, the drop counter, and popping.
module tb_preventive_rc;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0] now = 0;
  logic [15:0] pth = 16'hFFFF;
  logic act_valid = 0;
  logic [3:0] act_bank = 0;
  logic [15:0] act_row = 0;
  logic ins_valid, ins_ready;
  logic [3:0] ins_bank;
  logic [9:0] ins_deadline;
  logic [15:0] head_valid;
  logic [15:0] head_row [16];
  logic pop_valid = 0;
  logic [3:0] pop_bank = 0;
  logic [31:0] queued, dropped;

  preventive_rc dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  always_ff @(posedge clk) now <= now + 1'b1;

  int ins_cnt [16];
  always @(posedge clk) if (rst_n && ins_valid && ins_ready) begin
    ins_cnt[ins_bank]++;
    check(ins_deadline == now + 10'd556, "deadline");
  end

  task automatic activate(input int b, input int row);
    @(negedge clk); act_valid = 1; act_bank = 4'(b); act_row = 16'(row);
    @(negedge clk); act_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  function automatic bit nb(input logic [15:0] v, input int row);
    return int'(v) == row + 1 || int'(v) == row - 1;
  endfunction

  initial begin
    for (int b = 0; b < 16; b++) ins_cnt[b] = 0;
    ins_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    activate(0, 100); activate(0, 200); activate(0, 300); activate(0, 400);
    check(ins_cnt[0] == 4 && queued == 4, "four requests queued");
    check(head_valid[0] && nb(head_row[0], 100), "head is neighbour of first aggressor");
    activate(0, 500);                       // PR-FIFO full: held
    check(ins_cnt[0] == 4, "held while PR-FIFO full");
    check(ins_valid == 0, "no insert while PR-FIFO full");
    @(negedge clk); pop_valid = 1; pop_bank = 0;
    @(negedge clk); pop_valid = 0;
    check(nb(head_row[0], 200), "order after pop");
    repeat (2) @(negedge clk);
    check(ins_cnt[0] == 5, "held request enters after pop");
    // drain bank 0 and check order of the rest
    for (int k = 0; k < 4; k++) begin
      check(head_valid[0] && nb(head_row[0], 200 + 100 * k), $sformatf("order %0d", k));
      @(negedge clk); pop_valid = 1;
      @(negedge clk); pop_valid = 0;
    end
    check(!head_valid[0], "bank 0 empty");
    // table full: first request held, second dropped
    @(negedge clk); ins_ready = 0;
    activate(3, 1000);
    check(ins_valid && ins_bank == 3, "request held for a full table");
    activate(3, 2000);
    check(dropped == 1, "second request dropped");
    @(negedge clk); ins_ready = 1;
    repeat (2) @(negedge clk);
    check(ins_cnt[3] == 1 && head_valid[3] && nb(head_row[3], 1000), "held request delivered");
    // p_th = 0: nothing
    pth = 0;
    activate(5, 77); activate(5, 78);
    check(ins_cnt[5] == 0, "no refresh with p_th = 0");
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

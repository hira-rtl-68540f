// tb_para: PARA's trigger rate against p_th (0, 1/8, 1/2, nearly 1), that a victim is always
// a neighbour of the activated row (the only neighbour at the ends of the bank), that both
// neighbours are chosen about equally, and the one-cycle response.
module tb_para;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] pth;
  logic act_valid;
  logic [3:0] act_bank;
  logic [15:0] act_row;
  logic ref_valid;
  logic [3:0] ref_bank;
  logic [15:0] ref_row;

  para dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  int hits, ups, downs;
  logic [15:0] prev_row;
  logic [3:0]  prev_bank;
  logic        prev_act;

  task automatic run(input logic [15:0] p, input int n, input int mode);
    hits = 0; ups = 0; downs = 0;
    pth = p;
    for (int i = 0; i <= n; i++) begin
      @(negedge clk);
      // outputs now belong to the activation driven one cycle earlier
      if (i > 0 && ref_valid) begin
        hits++;
        check(prev_act, "refresh without activation");
        check(ref_bank == prev_bank, "bank");
        check(ref_row == prev_row + 1 || ref_row == prev_row - 1, "victim is a neighbour");
        if (mode == 1) check(ref_row == 16'h0001, "row 0 has only row 1");
        if (mode == 2) check(ref_row == 16'hFFFE, "last row has only its lower neighbour");
        if (ref_row == prev_row + 1) ups++; else downs++;
      end
      act_valid = (i < n) && ($urandom_range(0, 3) != 0);
      act_bank  = 4'($urandom);
      act_row   = (mode == 1) ? 16'h0000 : (mode == 2) ? 16'hFFFF : 16'($urandom_range(1, 65534));
      prev_act = act_valid; prev_bank = act_bank; prev_row = act_row;
    end
  endtask

  initial begin
    act_valid = 0; act_bank = 0; act_row = 0; pth = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(16'h0000, 4000, 0);
    check(hits == 0, "p_th = 0 must never refresh");
    run(16'h2000, 16000, 0);   // 1/8 of ~12000 activations = 1500
    check(hits > 1300 && hits < 1700, $sformatf("p_th=1/8 hits %0d", hits));
    run(16'h8000, 16000, 0);   // 1/2 -> ~6000
    check(hits > 5600 && hits < 6400, $sformatf("p_th=1/2 hits %0d", hits));
    check(ups > hits * 4 / 10 && downs > hits * 4 / 10, $sformatf("neighbour balance %0d/%0d", ups, downs));
    run(16'hFFFF, 2000, 1);
    check(hits > 1300, "p_th ~ 1 at row 0");
    run(16'hFFFF, 2000, 2);
    check(hits > 1300, "p_th ~ 1 at last row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

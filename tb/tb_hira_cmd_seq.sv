// tb_hira_cmd_seq: checks the command streams of all operation kinds.
// Directed part: exact cycle positions of a HiRA operation (ACT, PRE 9 cycles = t1 later,
// ACT 9 cycles = t2 later), the refresh-refresh HiRA finishing two rows in t1+t2+tRAS = 114
// cycles against tRAS+tRP+tRAS = 235 cycles for two nominal refreshes (51.5 % less; the
// paper's 38 ns against 78.25 ns), and precharge-before-activate on an open bank.
// Random part: a monitor checks tRAS, tRP, tRC per bank and tFAW per rank on every command,
// except the two commands inside a HiRA sequence, which must sit exactly t1 and t2 apart.
module tb_hira_cmd_seq;
  import hira_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic op_valid = 0, op_ready, cmd_access, op_done;
  op_e op_kind = OP_ACT;
  logic [3:0] op_bank = 0, cmd_bank;
  logic [15:0] op_row1 = 0, op_row2 = 0, cmd_row;
  cmd_e cmd;
  logic [15:0] bank_open;

  hira_cmd_seq dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL t=%0d %s", cyc, msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- monitor
  int last_act [16], last_pre [16];
  int acts [$];
  op_e cur_kind;
  int cur_n;                  // commands seen in the current operation
  int t_first, t_last;
  cmd_e log_cmd [$];
  int   log_t   [$];
  logic [15:0] log_row [$];
  int hira_ops = 0;

  initial for (int b = 0; b < 16; b++) begin last_act[b] = -1000; last_pre[b] = -1000; end

  always @(posedge clk) if (rst_n && cmd != CMD_NOP) begin
    automatic bit in_hira;
    in_hira = 0;
    // position inside a HiRA sequence: the PRE and the second ACT right after the first ACT
    if ((cur_kind == OP_HIRA_ACC || cur_kind == OP_HIRA_REF) && log_cmd.size() >= 1) begin
      if (cmd == CMD_PRE && log_cmd[$] == CMD_ACT && cyc - log_t[$] == T1_CYC) in_hira = 1;
      if (cmd == CMD_ACT && log_cmd[$] == CMD_PRE && cyc - log_t[$] == T2_CYC && log_cmd.size() >= 2 &&
          log_cmd[log_cmd.size()-2] == CMD_ACT && cyc - log_t[log_cmd.size()-2] == T1_CYC + T2_CYC) in_hira = 1;
    end
    if (cmd == CMD_ACT) begin
      int n;
      if (!in_hira) begin
        check(cyc - last_pre[cmd_bank] >= TRP_CYC, "tRP");
        check(cyc - last_act[cmd_bank] >= TRC_CYC, "tRC");
        check(!bank_open[cmd_bank], "ACT to an open bank");
      end
      acts.push_back(cyc);
      n = 0;
      foreach (acts[k]) if (cyc - acts[k] < TFAW_CYC) n++;
      check(n <= 4, "tFAW");
      if (acts.size() > 8) void'(acts.pop_front());
      last_act[cmd_bank] = cyc;
    end else begin
      if (!in_hira) check(cyc - last_act[cmd_bank] >= TRAS_CYC, "tRAS");
      else hira_ops++;
      last_pre[cmd_bank] = cyc;
    end
    log_cmd.push_back(cmd); log_t.push_back(cyc); log_row.push_back(cmd_row);
  end

  task automatic do_op(input op_e k, input int b, input int r1, input int r2);
    @(negedge clk);
    op_valid = 1; op_kind = k; op_bank = 4'(b); op_row1 = 16'(r1); op_row2 = 16'(r2);
    cur_kind = k;
    log_cmd.delete(); log_t.delete(); log_row.delete();
    cur_n = 1;
    while (!op_ready) @(negedge clk);
    @(posedge clk); t_first = cyc;
    @(negedge clk); op_valid = 0;
    while (!op_done) @(negedge clk);
    t_last = log_t.size() ? log_t[$] : t_first;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (200) @(posedge clk);
    // HiRA for access, bank closed
    do_op(OP_HIRA_ACC, 2, 100, 900);
    check(log_cmd.size() == 3, "HiRA has three commands");
    if (log_cmd.size() == 3) begin
      check(log_cmd[0] == CMD_ACT && log_row[0] == 100, "first ACT refreshes row1");
      check(log_cmd[1] == CMD_PRE && log_t[1] - log_t[0] == 9, "PRE t1 = 9 cycles after");
      check(log_cmd[2] == CMD_ACT && log_row[2] == 900 && log_t[2] - log_t[1] == 9, "ACT row2 t2 = 9 cycles after");
    end
    check(bank_open[2], "row2 left open");
    // plain ACT on the open bank: PRE first, after tRAS, then ACT after tRP
    do_op(OP_ACT, 2, 5, 0);
    check(log_cmd.size() == 2 && log_cmd[0] == CMD_PRE && log_cmd[1] == CMD_ACT, "PRE then ACT");
    if (log_cmd.size() == 2) check(log_t[1] - log_t[0] == TRP_CYC, "ACT exactly tRP after PRE");
    // refresh-refresh HiRA on a closed bank
    do_op(OP_HIRA_REF, 7, 10, 3000);
    check(log_cmd.size() == 4, "HiRA refresh has four commands");
    if (log_cmd.size() == 4) begin
      check(log_t[3] - log_t[0] == T1_CYC + T2_CYC + TRAS_CYC, $sformatf("two rows in %0d cycles", log_t[3] - log_t[0]));
      check(!bank_open[7], "bank closed after HiRA refresh");
    end
    begin
      int t_h, t_n;
      t_h = log_t[3] - log_t[0];
      // two nominal refreshes on another bank
      do_op(OP_REF, 9, 1, 0);
      t_n = log_t[0];
      do_op(OP_REF, 9, 2, 0);
      t_n = log_t[1] - t_n;
      check(t_n == TRAS_CYC + TRP_CYC + TRAS_CYC, $sformatf("two nominal refreshes in %0d cycles", t_n));
      $display("two-row refresh: HiRA %0d cycles, nominal %0d cycles (%0d%% less)", t_h, t_n, 100 - 100 * t_h / t_n);
    end
    // OP_PRE on a closed bank completes without a command
    do_op(OP_PRE, 9, 0, 0);
    check(log_cmd.size() == 0, "PRE of a closed bank is a no-op");
    // random operations, checked by the monitor
    for (int i = 0; i < 400; i++) begin
      int k;
      k = $urandom_range(0, 4);
      do_op(op_e'(k), $urandom_range(0, 3), $urandom_range(0, 65535), $urandom_range(0, 65535));
    end
    check(hira_ops > 50, "random part exercised HiRA");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

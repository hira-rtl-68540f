// tb_hira_mc: end-to-end test of the HiRA memory controller at its default (full) size:
// 16 banks, 128 subarrays of 512 rows, 68-entry Refresh Table, 3 GHz timing.
//
// A request-scheduler stand-in opens random rows in random banks with random gaps; the
// test runs in phases that change the load, the PARA probability and the Subarray Pairs
// Table so that every mechanism of the controller occurs:
//   1 mixed traffic, SPT pattern "i != j and (i + j) % 3 == 0", PARA at 1/16
//   2 idle: periodic refreshes must be forced (Case 2), the deadline checks find nothing
//   3 overload: SPT cleared, PARA at ~1, hammering two banks: nothing can be hidden, the
//     PR-FIFOs fill up and refreshes may run late (lateness is only reported here)
//   4 SPT restored, PARA at 1/4, traffic to one bank then idle: forced preventive refreshes
//     paired with periodic ones (refresh-refresh HiRA)
// Checks on the DRAM command bus, worked out from the commands alone:
//   tRAS, tRP, tRC per bank and at most four ACTs in any tFAW window, except inside a HiRA
//   sequence ACT-PRE-ACT, whose gaps must be exactly t1 and t2;
//   the two rows of every HiRA sequence lie in subarrays the SPT marks as a pair;
//   every scheduler activation is answered by exactly one ACT of its row;
//   refresh ACTs = periodic requests + preventive requests - requests still pending;
//   outside the overload phase, no pending refresh is more than MAX_LATE cycles past its
//   deadline.
// The PR-FIFO overflow drop is not required here: a bank can take at most one activation per
// tRC, so within tRefSlack = 4 tRC it can add at most four preventive refreshes, which is
// exactly the PR-FIFO depth; the drop path is exercised by the preventive_rc test instead.
// Each mechanism is counted and one that never happened is a failure.
module tb_hira_mc;
  import hira_pkg::*;
  localparam int NB = hira_pkg::NUM_BANKS, NS = hira_pkg::NUM_SA, RW = hira_pkg::ROW_W;
  localparam int MAX_LATE = 2 * TRC_CYC;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 15) $display("FAIL t=%0d %s", cyc, msg); end
  endtask

  logic refresh_en = 0, spt_wr_en = 0, act_valid = 0, act_ready, op_done;
  logic [15:0] pth = 0;
  logic [6:0] spt_wr_sa = 0;
  logic [NS-1:0] spt_wr_vec = 0;
  logic [3:0] act_bank = 0, cmd_bank;
  logic [RW-1:0] act_row = 0, cmd_row;
  logic [NB-1:0] bank_open;
  cmd_e cmd;
  hira_stats_t stats;
  logic [4:0] windows_done;
  logic [7:0] rt_occupancy;

  hira_mc dut (.*);

  // ---------------------------------------------------------------- reference SPT
  bit spt_m [NS][NS];
  task automatic write_spt(input bit pattern);
    for (int i = 0; i < NS; i++) begin
      @(negedge clk);
      spt_wr_en = 1; spt_wr_sa = 7'(i);
      for (int j = 0; j < NS; j++) begin
        spt_m[i][j] = pattern && (i != j) && ((i + j) % 3 == 0);
        spt_wr_vec[j] = spt_m[i][j];
      end
    end
    @(negedge clk); spt_wr_en = 0;
  endtask
  function automatic int sa(input logic [RW-1:0] r); return int'(r[RW-1 -: 7]); endfunction

  // ---------------------------------------------------------------- command-bus monitor
  int last_act [NB], last_pre [NB];
  int acts [$];
  cmd_e h_cmd [2];         // last two commands (any bank)
  int   h_t [2];
  logic [3:0] h_bank [2];
  logic [RW-1:0] h_row [2];
  int n_hira_seq = 0, n_ref_act = 0, n_acc_act = 0;
  int pend_act [$];        // rows the scheduler is waiting for: {bank,row}
  initial for (int b = 0; b < NB; b++) begin last_act[b] = -100000; last_pre[b] = -100000; end
  initial begin h_cmd[0] = CMD_NOP; h_cmd[1] = CMD_NOP; h_t[0] = 0; h_t[1] = 0; end

  always @(negedge clk) if (rst_n && cmd != CMD_NOP) begin
    automatic bit in_pre = 0, in_act2 = 0;
    in_pre  = cmd == CMD_PRE && h_cmd[1] == CMD_ACT && h_bank[1] == cmd_bank && cyc - h_t[1] == T1_CYC;
    in_act2 = cmd == CMD_ACT && h_cmd[1] == CMD_PRE && h_cmd[0] == CMD_ACT && h_bank[1] == cmd_bank &&
              h_bank[0] == cmd_bank && cyc - h_t[1] == T2_CYC && cyc - h_t[0] == T1_CYC + T2_CYC;
    if (cmd == CMD_ACT) begin
      int n;
      if (!in_act2) begin
        check(cyc - last_pre[cmd_bank] >= TRP_CYC, "tRP");
        check(cyc - last_act[cmd_bank] >= TRC_CYC, "tRC");
      end else begin
        n_hira_seq++;
        check(spt_m[sa(h_row[0])][sa(cmd_row)], $sformatf("HiRA rows %0d,%0d not in paired subarrays", h_row[0], cmd_row));
      end
      acts.push_back(cyc);
      n = 0;
      foreach (acts[k]) if (cyc - acts[k] < TFAW_CYC) n++;
      check(n <= 4, "tFAW");
      if (acts.size() > 8) void'(acts.pop_front());
      last_act[cmd_bank] = cyc;
      if (dut.u_seq.cmd_access) begin
        n_acc_act++;
        check(pend_act.size() > 0 && pend_act[0] == {cmd_bank, cmd_row}, "ACT of the requested row");
        if (pend_act.size() > 0) void'(pend_act.pop_front());
      end else n_ref_act++;
    end else begin
      if (!in_pre) check(cyc - last_act[cmd_bank] >= TRAS_CYC, "tRAS");
      last_pre[cmd_bank] = cyc;
    end
    h_cmd[0] = h_cmd[1]; h_t[0] = h_t[1]; h_bank[0] = h_bank[1]; h_row[0] = h_row[1];
    h_cmd[1] = cmd; h_t[1] = cyc; h_bank[1] = cmd_bank; h_row[1] = cmd_row;
  end

  // ---------------------------------------------------------------- mechanism counters
  int n_c1_per = 0, n_c1_prv = 0, n_c1_none = 0, n_force_pair = 0, n_force_single = 0;
  int n_fifo_full = 0, n_force_prv = 0, n_owed = 0, n_table_full = 0, max_late = 0, phase = 1;
  int late_ph [5] = '{0, 0, 0, 0, 0};
  always @(negedge clk) if (rst_n) begin
    if (dut.u_finder.resp_valid) begin
      if (!dut.u_finder.resp_hira) n_c1_none++;
      else if (dut.u_finder.resp_prev) n_c1_prv++;
      else n_c1_per++;
    end
    if (dut.u_finder.f_valid && dut.u_finder.f_ready) begin
      if (dut.u_finder.f_pair) n_force_pair++; else n_force_single++;
    end
    if (dut.u_periodic.owed > 1) n_owed++;
    if (|dut.u_preventive.fifo_full) n_fifo_full++;
    if (int'(rt_occupancy) == RT_ENTRIES) n_table_full++;
    if (dut.u_rt.g_valid && -int'(dut.u_rt.g_rem) > max_late) max_late = -int'(dut.u_rt.g_rem);
    if (dut.u_rt.g_valid && -int'(dut.u_rt.g_rem) > late_ph[phase]) late_ph[phase] = -int'(dut.u_rt.g_rem);
  end

  // ---------------------------------------------------------------- scheduler stand-in
  task automatic activate(input int b, input int r);
    @(negedge clk);
    act_valid = 1; act_bank = 4'(b); act_row = RW'(r);
    @(posedge clk);
    while (!act_ready) @(posedge clk);
    pend_act.push_back({4'(b), RW'(r)});
    @(negedge clk); act_valid = 0;
  endtask

  task automatic traffic(input int n, input int bank_lo, input int bank_hi, input int max_gap);
    for (int i = 0; i < n; i++) begin
      int b, g;
      b = bank_lo + int'($urandom_range(bank_hi - bank_lo));
      activate(b, int'($urandom) & ((1 << RW) - 1));
      g = int'($urandom_range(max_gap));
      repeat (g) @(negedge clk);
    end
  endtask

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    write_spt(1);
    @(negedge clk); refresh_en = 1; pth = 16'h1000;
    // 1 mixed traffic
    traffic(1500, 0, NB - 1, 120);
    $display("phase 1 done t=%0d", cyc); phase = 2;
    // 2 idle
    repeat (20000) @(negedge clk);
    $display("phase 2 done t=%0d", cyc); phase = 3;
    // 3 no pairs, PARA at ~1, hammer banks 0..3
    write_spt(0);
    pth = 16'hFFFF;
    traffic(600, 0, 1, 0);
    $display("phase 3 done t=%0d", cyc); phase = 4;
    // 4 pairs again, one bank then idle
    write_spt(1);
    pth = 16'h4000;
    for (int k = 0; k < 6; k++) begin
      traffic(30, 5, 5, 0);
      repeat (4000) @(negedge clk);
    end
    pth = 0;
    repeat (6000) @(negedge clk);
    refresh_en = 0;               // let everything pending drain before the totals are compared
    repeat (3000) @(negedge clk);
    $display("phase 4 done t=%0d", cyc);

    // end-of-run checks
    check(pend_act.size() == 0, "every activation got its ACT");
    check(n_ref_act == int'(stats.periodic_gen) + int'(stats.preventive_q) - int'(rt_occupancy),
          $sformatf("refresh ACTs %0d vs requests %0d + %0d - %0d pending", n_ref_act,
                    stats.periodic_gen, stats.preventive_q, rt_occupancy));
    check(int'(stats.hira_access) == n_c1_per + n_c1_prv, "HiRA-access count");
    check(int'(stats.plain_act) == n_c1_none, "plain ACT count");
    check(int'(stats.hira_refresh) + int'(stats.hira_access) == n_hira_seq, "HiRA sequences on the bus");
    check(late_ph[1] <= MAX_LATE && late_ph[2] <= MAX_LATE && late_ph[4] <= MAX_LATE,
          $sformatf("a refresh was %0d cycles late", max_late));
    $display("periodic requests        %0d", stats.periodic_gen);
    $display("preventive requests      %0d (dropped %0d)", stats.preventive_q, stats.preventive_drop);
    $display("HiRA refresh+access      %0d periodic, %0d preventive", n_c1_per, n_c1_prv);
    $display("plain ACT                %0d", n_c1_none);
    $display("HiRA refresh+refresh     %0d", n_force_pair);
    $display("forced single refresh    %0d", n_force_single);
    $display("deadline checks, nothing %0d", stats.idle_checks);
    $display("PR-FIFO full cycles      %0d", n_fifo_full);
    $display("generator backlog cycles %0d, table-full cycles %0d", n_owed, n_table_full);
    $display("worst lateness           %0d cycles (per phase %0d %0d %0d %0d)", max_late, late_ph[1], late_ph[2], late_ph[3], late_ph[4]);
    check(n_c1_per > 0, "mechanism: periodic refresh hidden behind an access");
    check(n_c1_prv > 0, "mechanism: preventive refresh hidden behind an access");
    check(n_c1_none > 0, "mechanism: plain ACT, nothing to hide");
    check(n_force_pair > 0, "mechanism: forced refresh-refresh HiRA");
    check(n_force_single > 0, "mechanism: forced single refresh");
    check(stats.idle_checks > 0, "mechanism: deadline check with nothing due");
    check(stats.preventive_q > 0, "mechanism: PARA preventive request");
    check(n_fifo_full > 0, "mechanism: PR-FIFO full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_refresh_table: random inserts and removals against a reference model of the Refresh
// Table; checks per-bank and rank-wide earliest-deadline searches (index, time to deadline),
// the exclusion input, occupancy and the full condition (ready low with 68 entries).
module tb_refresh_table;
  import hira_pkg::*;
  localparam int N = 68, DLW = 10, SL = 556, IW = 7;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic [DLW-1:0] now = '0;
  logic ins_p_valid, ins_p_ready, ins_v_valid, ins_v_ready;
  logic [3:0] ins_p_bank, ins_v_bank, q_bank, g_bank;
  logic [DLW-1:0] ins_p_deadline, ins_v_deadline;
  logic [1:0] rm_valid;
  logic [IW-1:0] rm_idx [2];
  logic q_excl_valid;
  logic [IW-1:0] q_excl_idx, q_per_idx, q_prv_idx, g_idx;
  logic q_per_valid, q_prv_valid, g_valid;
  logic signed [DLW:0] q_per_rem, q_prv_rem, g_rem;
  rtype_e g_type;
  logic [IW:0] occupancy;

  refresh_table dut (.*);

  // model
  int m_ty [N];   // 0 invalid, 1 periodic, 2 preventive
  int m_dl [N];   // absolute deadline (cycles)
  int m_bk [N];
  int t = 0;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL t=%0d %s", t, msg); end
  endtask

  int full_seen = 0;
  initial begin
    for (int i = 0; i < N; i++) m_ty[i] = 0;
    ins_p_valid = 0; ins_v_valid = 0; rm_valid = 0; rm_idx[0] = 0; rm_idx[1] = 0;
    ins_p_bank = 0; ins_v_bank = 0; ins_p_deadline = 0; ins_v_deadline = 0;
    q_bank = 0; q_excl_valid = 0; q_excl_idx = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (t = 0; t < 6000; t++) begin
      // stimulus, set between edges
      @(negedge clk);
      ins_p_valid = ($urandom_range(0, 99) < ((t / 1000) % 2 == 0 ? 40 : 5));
      ins_v_valid = ($urandom_range(0, 99) < ((t / 1000) % 2 == 0 ? 40 : 5));
      ins_p_bank = 4'($urandom_range(0, 3));
      ins_v_bank = 4'($urandom_range(0, 3));
      ins_p_deadline = DLW'(t + $urandom_range(0, SL));
      ins_v_deadline = DLW'(t + $urandom_range(0, SL));
      q_bank = 4'($urandom_range(0, 3));
      q_excl_valid = $urandom_range(0, 1);
      q_excl_idx = IW'($urandom_range(0, N - 1));
      rm_valid = 0;
      // remove entries: overdue ones first, else random ones
      for (int i = 0, k = 0; i < N && k < 2; i++)
        if (m_ty[i] != 0 && (m_dl[i] - t < -200 || $urandom_range(0, 99) < ((t / 1000) % 2 == 0 ? 1 : 8))) begin
          rm_valid[k] = 1; rm_idx[k] = IW'(i); k++;
        end
      #0;
      // compare searches against the model
      begin
        int ep, ev, eg, occ, fr;
        ep = -1; ev = -1; eg = -1; occ = 0; fr = 0;
        for (int i = 0; i < N; i++) begin
          if (m_ty[i] == 0) begin fr++; continue; end
          occ++;
          if (eg < 0 || m_dl[i] < m_dl[eg]) eg = i;
          if (m_bk[i] == int'(q_bank) && !(q_excl_valid && int'(q_excl_idx) == i)) begin
            if (m_ty[i] == 1 && (ep < 0 || m_dl[i] < m_dl[ep])) ep = i;
            if (m_ty[i] == 2 && (ev < 0 || m_dl[i] < m_dl[ev])) ev = i;
          end
        end
        check(int'(occupancy) == occ, $sformatf("occupancy %0d vs %0d p%0d v%0d", occupancy, occ, ins_p_valid, ins_v_valid));
        check(g_valid == (eg >= 0), "g_valid");
        if (eg >= 0) begin
          check(int'(g_rem) == m_dl[eg] - t, $sformatf("g_rem %0d vs %0d", g_rem, m_dl[eg] - t));
          check(int'(g_idx) == eg && int'(g_bank) == m_bk[eg] && int'(g_type) == m_ty[eg], "g entry");
        end
        check(q_per_valid == (ep >= 0), "per_valid");
        if (ep >= 0) check(int'(q_per_idx) == ep && int'(q_per_rem) == m_dl[ep] - t, "per entry");
        check(q_prv_valid == (ev >= 0), "prv_valid");
        if (ev >= 0) check(int'(q_prv_idx) == ev && int'(q_prv_rem) == m_dl[ev] - t, "prv entry");
        check(ins_p_ready == (fr >= 1), "p_ready");
        check(ins_v_ready == (ins_p_valid ? fr >= 2 : fr >= 1), "v_ready");
        if (fr == 0) full_seen++;
        // model update, mirroring the lowest-free allocation rule
        begin
          int f1, f2;
          f1 = -1; f2 = -1;
          for (int i = 0; i < N; i++)
            if (m_ty[i] == 0) begin
              if (f1 < 0) f1 = i; else if (f2 < 0) f2 = i;
            end
          for (int k = 0; k < 2; k++) if (rm_valid[k]) m_ty[rm_idx[k]] = 0;
          if (ins_p_valid && f1 >= 0) begin m_ty[f1] = 1; m_dl[f1] = t + ((int'(ins_p_deadline) - t) % 1024 + 1024) % 1024; m_bk[f1] = ins_p_bank; end
          if (ins_v_valid) begin
            int s;
            s = ins_p_valid ? f2 : f1;
            if (s >= 0) begin m_ty[s] = 2; m_dl[s] = t + ((int'(ins_v_deadline) - t) % 1024 + 1024) % 1024; m_bk[s] = ins_v_bank; end
          end
        end
      end
      @(posedge clk);
      now = now + 1'b1;
    end
    check(full_seen > 0, "table never filled");
    $display("full cycles seen: %0d", full_seen);
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

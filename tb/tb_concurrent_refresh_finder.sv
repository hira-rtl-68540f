// tb_concurrent_refresh_finder: the finder wired to a real Refresh Table, RefPtr Table,
// Subarray Pairs Table and PR-FIFOs at reduced sizes (4 banks, 8 subarrays of 4 rows,
// 16 table entries, tRC = 20 cycles, slack 80). The SPT pairs subarrays i and j when
// i != j and (i + j) is a multiple of 3. Directed cases, each with the expected answer
// worked out by hand from that pattern:
//   Case 1 with a periodic entry (least-advanced isolated subarray), with no entry, with a
//   preventive entry whose row is isolated / not isolated, and the choice by deadline;
//   answer latency of 2 cycles; Case 2 forced refresh paired with another refresh
//   (refresh-refresh HiRA), unpaired, and the do-nothing path.
module tb_concurrent_refresh_finder;
  import hira_pkg::*;
  localparam int NB = 4, NS = 8, RPS = 4, NE = 16, DLW = 10, TRC = 20, SLK = 80;
  localparam int BW = 2, SW = 3, RW = 5, IW = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("FAIL t=%0d %s", cyc, msg); end
  endtask

  logic [DLW-1:0] now = 0;
  always_ff @(posedge clk) now <= now + 1'b1;

  // finder ports
  logic q_valid = 0, q_ready, resp_valid, resp_hira, resp_prev;
  logic [BW-1:0] q_bank = 0;
  logic [RW-1:0] q_row = 0, resp_row;
  logic f_valid, f_ready, f_pair;
  logic [BW-1:0] f_bank;
  logic [RW-1:0] f_row_c, f_row_d;
  logic [BW-1:0] rt_q_bank, rp_q_bank, prf_pop_bank, g_bank;
  logic rt_q_excl_valid, per_valid, prv_valid, g_valid, rp_q_found, prf_pop_valid;
  logic [IW-1:0] rt_q_excl_idx, per_idx, prv_idx, g_idx;
  logic signed [DLW:0] per_rem, prv_rem, g_rem;
  rtype_e g_type;
  logic [1:0] rt_rm_valid, rp_adv_valid;
  logic [IW-1:0] rt_rm_idx [2];
  logic [NS-1:0] rp_q_mask;
  logic [SW-1:0] rp_q_sa;
  logic [RW-1:0] rp_q_row;
  logic [BW-1:0] rp_adv_bank [2];
  logic [SW-1:0] rp_adv_sa [2];
  logic [SW-1:0] spt_sa [2];
  logic [NS-1:0] spt_vec [2];
  logic [NB-1:0] prf_head_valid;
  logic [RW-1:0] prf_head_row [NB];
  logic [31:0] c2_idle_checks;

  // table inputs driven by the test
  logic ins_p_valid = 0, ins_v_valid = 0, ins_p_ready, ins_v_ready;
  logic [BW-1:0] ins_p_bank = 0, ins_v_bank = 0;
  logic [DLW-1:0] ins_p_deadline = 0, ins_v_deadline = 0;
  logic [IW:0] occupancy;
  logic spt_wr_en = 0;
  logic [SW-1:0] spt_wr_sa = 0;
  logic [NS-1:0] spt_wr_vec = 0;
  logic prf_push = 0;
  logic [BW-1:0] prf_push_bank = 0;
  logic [RW-1:0] prf_push_row = 0;
  logic [2:0] wd;

  concurrent_refresh_finder #(.NUM_BANKS(NB), .NUM_SA(NS), .ROWS_PER_SA(RPS), .RT_ENTRIES(NE),
    .DL_W(DLW), .TRC(TRC)) dut (
    .clk, .rst_n, .q_valid, .q_ready, .q_bank, .q_row, .resp_valid, .resp_hira, .resp_row, .resp_prev,
    .f_valid, .f_ready, .f_bank, .f_row_c, .f_pair, .f_row_d,
    .rt_q_bank, .rt_q_excl_valid, .rt_q_excl_idx,
    .rt_per_valid(per_valid), .rt_per_idx(per_idx), .rt_per_rem(per_rem),
    .rt_prv_valid(prv_valid), .rt_prv_idx(prv_idx), .rt_prv_rem(prv_rem),
    .rt_g_valid(g_valid), .rt_g_idx(g_idx), .rt_g_bank(g_bank), .rt_g_type(g_type), .rt_g_rem(g_rem),
    .rt_rm_valid, .rt_rm_idx,
    .rp_q_bank, .rp_q_mask, .rp_q_found, .rp_q_sa, .rp_q_row, .rp_adv_valid, .rp_adv_bank, .rp_adv_sa,
    .spt_rd_sa(spt_sa[0]), .spt_rd_vec(spt_vec[0]),
    .prf_head_valid, .prf_head_row, .prf_pop_valid, .prf_pop_bank, .c2_idle_checks);

  refresh_table #(.ENTRIES(NE), .DL_W(DLW), .BANK_W(BW), .SLACK(SLK)) u_rt (
    .clk, .rst_n, .now, .ins_p_valid, .ins_p_ready, .ins_p_bank, .ins_p_deadline,
    .ins_v_valid, .ins_v_ready, .ins_v_bank, .ins_v_deadline, .rm_valid(rt_rm_valid), .rm_idx(rt_rm_idx),
    .q_bank(rt_q_bank), .q_excl_valid(rt_q_excl_valid), .q_excl_idx(rt_q_excl_idx),
    .q_per_valid(per_valid), .q_per_idx(per_idx), .q_per_rem(per_rem),
    .q_prv_valid(prv_valid), .q_prv_idx(prv_idx), .q_prv_rem(prv_rem),
    .g_valid, .g_idx, .g_bank, .g_type, .g_rem, .occupancy);

  refptr_table #(.NUM_BANKS(NB), .NUM_SA(NS), .ROWS_PER_SA(RPS), .PTR_W(10)) u_rp (
    .clk, .rst_n, .q_bank(rp_q_bank), .q_mask(rp_q_mask), .q_found(rp_q_found), .q_sa(rp_q_sa),
    .q_row(rp_q_row), .adv_valid(rp_adv_valid), .adv_bank(rp_adv_bank), .adv_sa(rp_adv_sa),
    .windows_done(wd));

  spt #(.NUM_SA(NS)) u_spt (.clk, .rst_n, .wr_en(spt_wr_en), .wr_sa(spt_wr_sa), .wr_vec(spt_wr_vec),
    .rd_sa(spt_sa), .rd_vec(spt_vec));
  assign spt_sa[1] = '0;

  for (genvar b = 0; b < NB; b++) begin : g_f
    logic full;
    logic [2:0] cnt;
    pr_fifo #(.DEPTH(4), .ROW_W(RW)) u_f (.clk, .rst_n,
      .push(prf_push && prf_push_bank == BW'(b)), .push_row(prf_push_row),
      .pop(prf_pop_valid && prf_pop_bank == BW'(b)),
      .head_valid(prf_head_valid[b]), .head_row(prf_head_row[b]), .full(full), .count(cnt));
  end

  function automatic int row(input int sa, input int r); return sa * RPS + r; endfunction

  task automatic add_per(input int b, input int slack);
    @(negedge clk); ins_p_valid = 1; ins_p_bank = BW'(b); ins_p_deadline = now + DLW'(slack);
    @(negedge clk); ins_p_valid = 0;
  endtask
  task automatic add_prv(input int b, input int r, input int slack);
    @(negedge clk); ins_v_valid = 1; ins_v_bank = BW'(b); ins_v_deadline = now + DLW'(slack);
    prf_push = 1; prf_push_bank = BW'(b); prf_push_row = RW'(r);
    @(negedge clk); ins_v_valid = 0; prf_push = 0;
  endtask

  int lat;
  task automatic query(input int b, input int r);
    @(negedge clk);
    while (!q_ready) @(negedge clk);
    q_valid = 1; q_bank = BW'(b); q_row = RW'(r);
    @(posedge clk); lat = cyc;
    @(negedge clk); q_valid = 0;
    while (!resp_valid) @(negedge clk);
    lat = cyc - lat;
  endtask

  // forced refreshes are recorded as they are accepted
  int f_n = 0, f_last_bank, f_last_c, f_last_d, f_last_pair, f_t;
  assign f_ready = 1'b1;
  always @(posedge clk) if (rst_n && f_valid) begin
    f_n++; f_last_bank = f_bank; f_last_c = f_row_c; f_last_d = f_row_d; f_last_pair = f_pair; f_t = cyc;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); spt_wr_en = 1; spt_wr_sa = SW'(i);
      for (int j = 0; j < NS; j++) spt_wr_vec[j] = (i != j) && ((i + j) % 3 == 0);
    end
    @(negedge clk); spt_wr_en = 0;

    // 1. periodic refresh hidden behind an access to subarray 1 -> subarray 2 (pairs: 2, 5)
    add_per(1, SLK);
    query(1, row(1, 3));
    check(lat == 2, $sformatf("answer latency %0d", lat));
    check(resp_hira && !resp_prev && resp_row == RW'(row(2, 0)), "periodic in least-advanced isolated subarray");
    @(negedge clk);
    check(occupancy == 0, "entry retired");
    // 2. nothing queued: plain ACT
    query(1, row(1, 0));
    check(!resp_hira, "no refresh queued -> plain ACT");
    // 3. subarray 2 has advanced, so the next periodic refresh of bank 1 goes to subarray 5
    add_per(1, SLK);
    query(1, row(1, 2));
    check(resp_hira && resp_row == RW'(row(5, 0)), "balanced pointer advance");
    // 4. preventive, row in subarray 4: usable from subarray 2 (2+4=6), not from 1 (1+4=5)
    add_prv(0, row(4, 1), SLK);
    query(0, row(1, 0));
    check(!resp_hira, "preventive row not isolated -> plain ACT");
    query(0, row(2, 0));
    check(resp_hira && resp_prev && resp_row == RW'(row(4, 1)), "preventive row hidden");
    check(!prf_head_valid[0], "PR-FIFO popped");
    // 5. both kinds usable: the earlier deadline wins
    add_per(2, 60);
    add_prv(2, row(7, 2), 30);      // 7 pairs with 2 and 5
    query(2, row(5, 0));
    check(resp_hira && resp_prev && resp_row == RW'(row(7, 2)), "earlier (preventive) deadline first");
    query(2, row(5, 0));
    check(resp_hira && !resp_prev && resp_row == RW'(row(1, 0)), "then the periodic one (subarray 1 pairs with 5)");
    // 6. Case 2, refresh-refresh: preventive RowC in subarray 4 of bank 0, periodic partner
    begin
      int t0, n0;
      n0 = f_n;
      add_prv(0, row(4, 3), 40);
      add_per(0, SLK);
      t0 = cyc;
      while (f_n == n0 && cyc < t0 + 200) @(negedge clk);
      check(f_n == n0 + 1, "forced refresh issued");
      check(f_t - t0 <= 40 + 1, "forced no later than the deadline");
      check(f_last_bank == 0 && f_last_c == row(4, 3), "RowC is the due preventive row");
      check(f_last_pair == 1 && f_last_d == row(2, 0), "paired with a periodic row in subarray 2");
      repeat (3) @(negedge clk);
      check(occupancy == 0, "both entries retired");
    end
    // 7. Case 2, nothing to pair with: nominal refresh of the least-advanced subarray
    begin
      int n0;
      n0 = f_n;
      add_per(3, 30);
      repeat (80) @(negedge clk);
      check(f_n == n0 + 1 && f_last_bank == 3 && f_last_pair == 0 && f_last_c == row(0, 0), "unpaired forced refresh");
    end
    // 8. nothing due: checks find nothing
    begin
      logic [31:0] c0;
      c0 = c2_idle_checks;
      repeat (5 * TRC) @(negedge clk);
      check(c2_idle_checks >= c0 + 4, "deadline checks with nothing due do nothing");
    end
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

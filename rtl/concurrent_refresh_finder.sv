// concurrent_refresh_finder: decides which queued refresh is performed, when, and with what.
//
// Case 1, refresh-access parallelism. When the request scheduler is about to activate RowA
// in a bank (query q_*; in the paper the trigger is the PRE issued before that ACT), the
// finder looks at the bank's pending refreshes in deadline order:
//   * a Periodic entry can be served if the RefPtr Table has a not-yet-refreshed row in a
//     subarray that the Subarray Pairs Table (SPT) lists as isolated from RowA's subarray;
//     the least-advanced such subarray is taken;
//   * a Preventive entry can be served if the bank's PR-FIFO head lies in such a subarray.
// All Periodic entries of a bank give the same answer, and the earliest Preventive entry
// belongs to the PR-FIFO head, so it is enough to test the earliest entry of each type and
// take the one with the earlier deadline that succeeds. On success the answer is
// HiRA(RowB, RowA): the first ACT refreshes RowB, the second opens RowA. Otherwise a plain
// ACT(RowA) is issued and the refreshes stay queued.
// The answer (resp_*) comes 2 cycles after the query is accepted (0.67 ns at 3 GHz), well
// inside the 14.25 ns precharge it overlaps. The table updates (entry removed, RefPtr
// advanced or PR-FIFO popped) happen at the same clock edge.
//
// Case 2, refresh deadlines. A timer with period TRC makes the finder look at the rank's
// entry with the earliest deadline. If that deadline is less than TRC away (or passed) the
// refresh (RowC) is forced: the finder looks for a second queued refresh of the same bank
// (RowD) in a subarray isolated from RowC's and, if found, asks for HiRA(RowC, RowD)
// (refresh-refresh parallelism), otherwise for a nominal refresh of RowC. The request
// (f_*) is held until the command side accepts it (f_ready); the command side precharges the
// bank first if it is open. If nothing is close to its deadline the finder does nothing, so
// refreshes keep waiting for an access to hide behind. After a forced refresh is accepted
// the check is repeated at once instead of one TRC later, so that several refreshes that fall
// due together are issued back to back (this design's choice; it keeps lateness within
// about one operation under normal load).
// For RowD, a preventive RowC pairs only with a periodic refresh, because only the PR-FIFO
// head is visible (this design's choice).
//
// The RefPtr advance port 1 takes its subarray straight from the RefPtr lookup answer
// (rp_adv_sa[1] = rp_q_sa), so those seven output bits are wired from inputs by design.
// The finder serves one query at a time; a pending deadline check goes before a new
// Case 1 query (q_ready is low meanwhile).
module concurrent_refresh_finder
  import hira_pkg::*;
#(
  parameter int NUM_BANKS   = hira_pkg::NUM_BANKS,
  parameter int NUM_SA      = hira_pkg::NUM_SA,
  parameter int ROWS_PER_SA = hira_pkg::ROWS_PER_SA,
  parameter int RT_ENTRIES  = hira_pkg::RT_ENTRIES,
  parameter int DL_W        = hira_pkg::DL_W,
  parameter int TRC         = hira_pkg::TRC_CYC,
  localparam int BANK_W     = $clog2(NUM_BANKS),
  localparam int SA_W       = $clog2(NUM_SA),
  localparam int ROW_W      = SA_W + $clog2(ROWS_PER_SA),
  localparam int IDX_W      = $clog2(RT_ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  // Case 1: activation query from the request scheduler
  input  logic              q_valid,
  output logic              q_ready,
  input  logic [BANK_W-1:0] q_bank,
  input  logic [ROW_W-1:0]  q_row,
  output logic              resp_valid,
  output logic              resp_hira,     // 1: HiRA(resp_row, q_row); 0: ACT(q_row)
  output logic [ROW_W-1:0]  resp_row,
  output logic              resp_prev,     // the hidden refresh was a preventive one
  // Case 2: forced refresh to the command side
  output logic              f_valid,
  input  logic              f_ready,
  output logic [BANK_W-1:0] f_bank,
  output logic [ROW_W-1:0]  f_row_c,
  output logic              f_pair,        // 1: HiRA(f_row_c, f_row_d); 0: refresh f_row_c only
  output logic [ROW_W-1:0]  f_row_d,
  // Refresh Table
  output logic [BANK_W-1:0] rt_q_bank,
  output logic              rt_q_excl_valid,
  output logic [IDX_W-1:0]  rt_q_excl_idx,
  input  logic              rt_per_valid,
  input  logic [IDX_W-1:0]  rt_per_idx,
  input  logic signed [DL_W:0] rt_per_rem,
  input  logic              rt_prv_valid,
  input  logic [IDX_W-1:0]  rt_prv_idx,
  input  logic signed [DL_W:0] rt_prv_rem,
  input  logic              rt_g_valid,
  input  logic [IDX_W-1:0]  rt_g_idx,
  input  logic [BANK_W-1:0] rt_g_bank,
  input  rtype_e            rt_g_type,
  input  logic signed [DL_W:0] rt_g_rem,
  output logic [1:0]        rt_rm_valid,
  output logic [IDX_W-1:0]  rt_rm_idx [2],
  // RefPtr Table
  output logic [BANK_W-1:0] rp_q_bank,
  output logic [NUM_SA-1:0] rp_q_mask,
  input  logic              rp_q_found,
  input  logic [SA_W-1:0]   rp_q_sa,
  input  logic [ROW_W-1:0]  rp_q_row,
  output logic [1:0]        rp_adv_valid,
  output logic [BANK_W-1:0] rp_adv_bank [2],
  output logic [SA_W-1:0]   rp_adv_sa   [2],
  // Subarray Pairs Table
  output logic [SA_W-1:0]   spt_rd_sa,
  input  logic [NUM_SA-1:0] spt_rd_vec,
  // PR-FIFOs
  input  logic [NUM_BANKS-1:0] prf_head_valid,
  input  logic [ROW_W-1:0]     prf_head_row [NUM_BANKS],
  output logic                 prf_pop_valid,
  output logic [BANK_W-1:0]    prf_pop_bank,
  // statistics: deadline checks that found nothing close
  output logic [31:0]       c2_idle_checks
);

  typedef enum logic [2:0] {S_IDLE, S_C1, S_C2_C, S_C2_D, S_C2_OUT} state_e;
  state_e state;

  localparam int TIMER_W = $clog2(TRC + 1);
  logic [TIMER_W-1:0] timer;
  logic               chk_pending;

  // latched request
  logic [BANK_W-1:0] l_bank;
  logic [ROW_W-1:0]  l_row;     // RowA (Case 1) or RowC (Case 2)
  logic [IDX_W-1:0]  c_idx;
  logic              c_per;     // RowC comes from a periodic entry

  function automatic logic [SA_W-1:0] sa_of(input logic [ROW_W-1:0] r);
    return r[ROW_W-1 -: SA_W];
  endfunction

  // ---------------------------------------------------------------- shared table ports
  logic [NUM_SA-1:0] iso;          // subarrays isolated from the latched row's subarray
  logic [ROW_W-1:0]  head;
  logic              head_ok;
  always_comb begin
    spt_rd_sa       = sa_of(l_row);
    iso             = spt_rd_vec & ~(NUM_SA'(1) << sa_of(l_row));
    rt_q_bank       = l_bank;
    rt_q_excl_valid = (state == S_C2_D);
    rt_q_excl_idx   = c_idx;
    rp_q_bank       = l_bank;
    rp_q_mask       = (state == S_C2_C) ? '1 : iso;
    head            = prf_head_row[l_bank];
    head_ok         = prf_head_valid[l_bank] && iso[sa_of(head)];
  end

  // candidate choice for Case 1 and for RowD in Case 2
  logic per_ok, prv_ok, use_per, use_prv;
  always_comb begin
    per_ok  = rt_per_valid && rp_q_found;
    prv_ok  = rt_prv_valid && head_ok && (state == S_C1 || c_per);
    use_per = per_ok && (!prv_ok || rt_per_rem <= rt_prv_rem);
    use_prv = prv_ok && !use_per;
  end

  assign q_ready = (state == S_IDLE) && !chk_pending;

  logic g_close;
  assign g_close = rt_g_valid && (rt_g_rem < $signed((DL_W+1)'(TRC)));

  // ---------------------------------------------------------------- table updates
  always_comb begin
    rt_rm_valid    = '0;
    rt_rm_idx[0]   = '0;
    rt_rm_idx[1]   = '0;
    rp_adv_valid   = '0;
    rp_adv_bank[0] = l_bank;
    rp_adv_bank[1] = l_bank;
    rp_adv_sa[0]   = '0;
    rp_adv_sa[1]   = rp_q_sa;
    prf_pop_valid  = 1'b0;
    prf_pop_bank   = l_bank;
    if (state == S_C1 || state == S_C2_D) begin
      if (use_per) begin
        rt_rm_valid[1]  = 1'b1;
        rt_rm_idx[1]    = rt_per_idx;
        rp_adv_valid[1] = 1'b1;
      end
      if (use_prv) begin
        rt_rm_valid[1] = 1'b1;
        rt_rm_idx[1]   = rt_prv_idx;
        prf_pop_valid  = 1'b1;
      end
    end
    if (state == S_C2_D) begin
      // RowC is retired whether or not a partner was found
      rt_rm_valid[0] = 1'b1;
      rt_rm_idx[0]   = c_idx;
      if (c_per) begin
        rp_adv_valid[0] = 1'b1;
        rp_adv_sa[0]    = sa_of(l_row);
      end else begin
        prf_pop_valid = 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      timer          <= '0;
      chk_pending    <= 1'b0;
      l_bank         <= '0;
      l_row          <= '0;
      c_idx          <= '0;
      c_per          <= 1'b0;
      resp_valid     <= 1'b0;
      resp_hira      <= 1'b0;
      resp_row       <= '0;
      resp_prev      <= 1'b0;
      f_valid        <= 1'b0;
      f_bank         <= '0;
      f_row_c        <= '0;
      f_pair         <= 1'b0;
      f_row_d        <= '0;
      c2_idle_checks <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (int'(timer) == TRC - 1) begin
        timer       <= '0;
        chk_pending <= 1'b1;
      end else begin
        timer <= timer + 1'b1;
      end

      unique case (state)
        S_IDLE: begin
          if (chk_pending) begin
            chk_pending <= (int'(timer) == TRC - 1);
            if (g_close) begin
              l_bank <= rt_g_bank;
              c_idx  <= rt_g_idx;
              c_per  <= (rt_g_type == RT_PERIODIC);
              state  <= S_C2_C;
            end else begin
              c2_idle_checks <= c2_idle_checks + 1;
            end
          end else if (q_valid) begin
            l_bank <= q_bank;
            l_row  <= q_row;
            state  <= S_C1;
          end
        end

        S_C1: begin
          resp_valid <= 1'b1;
          resp_hira  <= use_per || use_prv;
          resp_row   <= use_per ? rp_q_row : head;
          resp_prev  <= use_prv;
          state      <= S_IDLE;
        end

        S_C2_C: begin
          // pick RowC: least-advanced subarray of the bank, or the PR-FIFO head
          l_row <= c_per ? rp_q_row : prf_head_row[l_bank];
          state <= S_C2_D;
        end

        S_C2_D: begin
          f_valid <= 1'b1;
          f_bank  <= l_bank;
          f_row_c <= l_row;
          f_pair  <= use_per || use_prv;
          f_row_d <= use_per ? rp_q_row : head;
          state   <= S_C2_OUT;
        end

        S_C2_OUT: begin
          if (f_ready) begin
            f_valid     <= 1'b0;
            chk_pending <= 1'b1;   // look again at once: more refreshes may be due
            state       <= S_IDLE;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (rst_n && state == S_C2_C) begin
      assert (!c_per || rp_q_found) else $error("finder: no subarray left for a periodic refresh");
      assert (c_per || prf_head_valid[l_bank]) else $error("finder: preventive entry without PR-FIFO row");
    end

endmodule

// hira_mc: the HiRA memory controller extension for one DRAM rank (top level).
//
// It replaces rank-level REF commands by row-by-row refreshes and hides them, with HiRA
// operations, behind other row activations of the same bank. Parts:
//   periodic_rc    Refresh Generator + RefPtr Table: one periodic request per 60.9 ns,
//                  banks in turn, deadline now + tRefSlack
//   preventive_rc  PARA + per-bank PR-FIFOs: preventive refreshes of RowHammer victims
//   refresh_table  68 pending requests: deadline, bank, type
//   spt            Subarray Pairs Table: which subarrays HiRA may pair
//   concurrent_refresh_finder  picks the refresh to hide (Case 1) or forces it (Case 2)
//   hira_cmd_seq   issues ACT/PRE with HiRA timing, tRAS/tRP/tRC and tFAW
//
// Request scheduler side (the scheduler itself, e.g. FR-FCFS, is outside): to open a row
// the scheduler presents act_valid/act_bank/act_row. On acceptance (act_ready) the bank is
// precharged if open and, overlapping that precharge, the finder is asked for a refresh to
// hide; then either HiRA(refresh row, act_row) or ACT(act_row) is issued. Column commands
// (RD/WR) stay with the scheduler, which sees the bank state on bank_open and op_done.
// Refreshes whose deadline is near are forced by the finder and take precedence over new
// activations.
// DRAM side: one command per cycle on cmd/cmd_bank/cmd_row (ACT or PRE; NOP otherwise).
// Configuration: the SPT is written through spt_wr_*; pth is PARA's probability (x 2^-16);
// refresh_en starts periodic refresh.
// All times are cycles of the controller clock, 3 GHz by default.
// Following the published HiRA-MC organisation: the four components, their table sizes
// (68-entry Refresh Table, 2048 RefPtr entries, 4-entry PR-FIFO per bank, 128-subarray SPT),
// tRefSlack = 4 tRC and the two finder cases. This design's own choices: the scheduler
// interface (act_valid/act_ready), forced refreshes taking priority over new activations,
// and a command sequencer that runs one row operation at a time for the rank.
// resp_prev (whether a hidden refresh was preventive) is not needed here; it is kept on the
// finder for monitoring.
module hira_mc
  import hira_pkg::*;
#(
  parameter int NUM_BANKS   = hira_pkg::NUM_BANKS,
  parameter int NUM_SA      = hira_pkg::NUM_SA,
  parameter int ROWS_PER_SA = hira_pkg::ROWS_PER_SA,
  parameter int PTR_W       = hira_pkg::PTR_W,
  parameter int RT_ENTRIES  = hira_pkg::RT_ENTRIES,
  parameter int PRF_DEPTH   = hira_pkg::PRF_DEPTH,
  parameter int DL_W        = hira_pkg::DL_W,
  parameter int T1          = hira_pkg::T1_CYC,
  parameter int T2          = hira_pkg::T2_CYC,
  parameter int TRAS        = hira_pkg::TRAS_CYC,
  parameter int TRP         = hira_pkg::TRP_CYC,
  parameter int TRC         = hira_pkg::TRC_CYC,
  parameter int TFAW        = hira_pkg::TFAW_CYC,
  parameter int GEN_PERIOD  = hira_pkg::GEN_CYC,
  parameter int TREFSLACK   = hira_pkg::SLACK_CYC,
  localparam int BANK_W     = $clog2(NUM_BANKS),
  localparam int SA_W       = $clog2(NUM_SA),
  localparam int ROW_W      = SA_W + $clog2(ROWS_PER_SA),
  localparam int IDX_W      = $clog2(RT_ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              refresh_en,
  input  logic [15:0]       pth,
  input  logic              spt_wr_en,
  input  logic [SA_W-1:0]   spt_wr_sa,
  input  logic [NUM_SA-1:0] spt_wr_vec,
  // request scheduler
  input  logic              act_valid,
  output logic              act_ready,
  input  logic [BANK_W-1:0] act_bank,
  input  logic [ROW_W-1:0]  act_row,
  output logic              op_done,
  output logic [NUM_BANKS-1:0] bank_open,
  // DRAM command bus
  output cmd_e              cmd,
  output logic [BANK_W-1:0] cmd_bank,
  output logic [ROW_W-1:0]  cmd_row,
  // status
  output hira_stats_t       stats,
  output logic [BANK_W:0]   windows_done,
  output logic [IDX_W:0]    rt_occupancy
);

  // ------------------------------------------------------------------ time base
  logic [DL_W-1:0] now;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;

  // ------------------------------------------------------------------ wiring
  logic              pg_valid, pg_ready;
  logic [BANK_W-1:0] pg_bank;
  logic [DL_W-1:0]   pg_deadline;
  logic              pv_valid, pv_ready;
  logic [BANK_W-1:0] pv_bank;
  logic [DL_W-1:0]   pv_deadline;

  logic [1:0]        rm_valid;
  logic [IDX_W-1:0]  rm_idx [2];
  logic [BANK_W-1:0] rtq_bank;
  logic              rtq_excl_valid;
  logic [IDX_W-1:0]  rtq_excl_idx;
  logic              per_valid, prv_valid, g_valid;
  logic [IDX_W-1:0]  per_idx, prv_idx, g_idx;
  logic signed [DL_W:0] per_rem, prv_rem, g_rem;
  logic [BANK_W-1:0] g_bank;
  rtype_e            g_type;

  logic [BANK_W-1:0] rpq_bank;
  logic [NUM_SA-1:0] rpq_mask;
  logic              rpq_found;
  logic [SA_W-1:0]   rpq_sa;
  logic [ROW_W-1:0]  rpq_row;
  logic [1:0]        rpa_valid;
  logic [BANK_W-1:0] rpa_bank [2];
  logic [SA_W-1:0]   rpa_sa   [2];

  logic [SA_W-1:0]   spt_sa  [2];
  logic [NUM_SA-1:0] spt_vec [2];

  logic [NUM_BANKS-1:0] prf_head_valid;
  logic [ROW_W-1:0]     prf_head_row [NUM_BANKS];
  logic                 prf_pop_valid;
  logic [BANK_W-1:0]    prf_pop_bank;

  logic              q_valid, q_ready, resp_valid, resp_hira, resp_prev;
  logic [ROW_W-1:0]  resp_row;
  logic              f_valid, f_ready, f_pair;
  logic [BANK_W-1:0] f_bank;
  logic [ROW_W-1:0]  f_row_c, f_row_d;

  logic              op_valid, op_ready, cmd_access;
  op_e               op_kind;
  logic [BANK_W-1:0] op_bank;
  logic [ROW_W-1:0]  op_row1, op_row2;

  logic [31:0] gen_cnt, prq_cnt, drop_cnt, idle_cnt;

  // ------------------------------------------------------------------ blocks
  periodic_rc #(
    .NUM_BANKS(NUM_BANKS), .NUM_SA(NUM_SA), .ROWS_PER_SA(ROWS_PER_SA), .PTR_W(PTR_W),
    .DL_W(DL_W), .GEN_PERIOD(GEN_PERIOD), .TREFSLACK(TREFSLACK)
  ) u_periodic (
    .clk, .rst_n, .enable(refresh_en), .now,
    .req_valid(pg_valid), .req_ready(pg_ready), .req_bank(pg_bank), .req_deadline(pg_deadline),
    .rp_q_bank(rpq_bank), .rp_q_mask(rpq_mask), .rp_q_found(rpq_found), .rp_q_sa(rpq_sa),
    .rp_q_row(rpq_row), .rp_adv_valid(rpa_valid), .rp_adv_bank(rpa_bank), .rp_adv_sa(rpa_sa),
    .generated(gen_cnt), .windows_done
  );

  preventive_rc #(
    .NUM_BANKS(NUM_BANKS), .ROW_W(ROW_W), .DL_W(DL_W), .DEPTH(PRF_DEPTH),
    .TREFSLACK(TREFSLACK), .PTH_W(16)
  ) u_preventive (
    .clk, .rst_n, .now, .pth,
    .act_valid(cmd == CMD_ACT && cmd_access), .act_bank(cmd_bank), .act_row(cmd_row),
    .ins_valid(pv_valid), .ins_ready(pv_ready), .ins_bank(pv_bank), .ins_deadline(pv_deadline),
    .head_valid(prf_head_valid), .head_row(prf_head_row),
    .pop_valid(prf_pop_valid), .pop_bank(prf_pop_bank),
    .queued(prq_cnt), .dropped(drop_cnt)
  );

  refresh_table #(
    .ENTRIES(RT_ENTRIES), .DL_W(DL_W), .BANK_W(BANK_W), .SLACK(TREFSLACK)
  ) u_rt (
    .clk, .rst_n, .now,
    .ins_p_valid(pg_valid), .ins_p_ready(pg_ready), .ins_p_bank(pg_bank), .ins_p_deadline(pg_deadline),
    .ins_v_valid(pv_valid), .ins_v_ready(pv_ready), .ins_v_bank(pv_bank), .ins_v_deadline(pv_deadline),
    .rm_valid, .rm_idx,
    .q_bank(rtq_bank), .q_excl_valid(rtq_excl_valid), .q_excl_idx(rtq_excl_idx),
    .q_per_valid(per_valid), .q_per_idx(per_idx), .q_per_rem(per_rem),
    .q_prv_valid(prv_valid), .q_prv_idx(prv_idx), .q_prv_rem(prv_rem),
    .g_valid, .g_idx, .g_bank, .g_type, .g_rem,
    .occupancy(rt_occupancy)
  );

  spt #(.NUM_SA(NUM_SA)) u_spt (
    .clk, .rst_n, .wr_en(spt_wr_en), .wr_sa(spt_wr_sa), .wr_vec(spt_wr_vec),
    .rd_sa(spt_sa), .rd_vec(spt_vec)
  );
  assign spt_sa[1] = '0;   // second read port unused at the top level

  concurrent_refresh_finder #(
    .NUM_BANKS(NUM_BANKS), .NUM_SA(NUM_SA), .ROWS_PER_SA(ROWS_PER_SA),
    .RT_ENTRIES(RT_ENTRIES), .DL_W(DL_W), .TRC(TRC)
  ) u_finder (
    .clk, .rst_n,
    .q_valid, .q_ready, .q_bank(act_bank), .q_row(act_row),
    .resp_valid, .resp_hira, .resp_row, .resp_prev,
    .f_valid, .f_ready, .f_bank, .f_row_c, .f_pair, .f_row_d,
    .rt_q_bank(rtq_bank), .rt_q_excl_valid(rtq_excl_valid), .rt_q_excl_idx(rtq_excl_idx),
    .rt_per_valid(per_valid), .rt_per_idx(per_idx), .rt_per_rem(per_rem),
    .rt_prv_valid(prv_valid), .rt_prv_idx(prv_idx), .rt_prv_rem(prv_rem),
    .rt_g_valid(g_valid), .rt_g_idx(g_idx), .rt_g_bank(g_bank), .rt_g_type(g_type), .rt_g_rem(g_rem),
    .rt_rm_valid(rm_valid), .rt_rm_idx(rm_idx),
    .rp_q_bank(rpq_bank), .rp_q_mask(rpq_mask), .rp_q_found(rpq_found), .rp_q_sa(rpq_sa),
    .rp_q_row(rpq_row), .rp_adv_valid(rpa_valid), .rp_adv_bank(rpa_bank), .rp_adv_sa(rpa_sa),
    .spt_rd_sa(spt_sa[0]), .spt_rd_vec(spt_vec[0]),
    .prf_head_valid, .prf_head_row, .prf_pop_valid, .prf_pop_bank,
    .c2_idle_checks(idle_cnt)
  );

  hira_cmd_seq #(
    .NUM_BANKS(NUM_BANKS), .ROW_W(ROW_W), .T1(T1), .T2(T2), .TRAS(TRAS), .TRP(TRP),
    .TRC(TRC), .TFAW(TFAW)
  ) u_seq (
    .clk, .rst_n, .op_valid, .op_ready, .op_kind, .op_bank, .op_row1, .op_row2,
    .cmd, .cmd_bank, .cmd_row, .cmd_access, .op_done, .bank_open
  );

  // ------------------------------------------------------------------ glue
  // G_IDLE:  a forced refresh goes first; else an activation is accepted, its bank is
  //          precharged (OP_PRE) and the finder is queried in the same cycle.
  // G_WAIT:  wait for the finder's answer.
  // G_ISSUE: hand HiRA(refresh, access) or ACT(access) to the sequencer.
  typedef enum logic [1:0] {G_IDLE, G_WAIT, G_ISSUE} gstate_e;
  gstate_e gstate;
  logic [BANK_W-1:0] a_bank;
  logic [ROW_W-1:0]  a_row, a_ref_row;
  logic              a_hira;

  always_comb begin
    f_ready   = 1'b0;
    act_ready = 1'b0;
    q_valid   = 1'b0;
    op_valid  = 1'b0;
    op_kind   = OP_ACT;
    op_bank   = a_bank;
    op_row1   = a_row;
    op_row2   = a_row;
    unique case (gstate)
      G_IDLE:
        if (f_valid) begin
          f_ready  = op_ready;
          op_valid = 1'b1;
          op_kind  = f_pair ? OP_HIRA_REF : OP_REF;
          op_bank  = f_bank;
          op_row1  = f_row_c;
          op_row2  = f_row_d;
        end else if (act_valid && q_ready && op_ready) begin
          act_ready = 1'b1;
          q_valid   = 1'b1;
          op_valid  = 1'b1;
          op_kind   = OP_PRE;
          op_bank   = act_bank;
        end
      G_ISSUE: begin
        op_valid = 1'b1;
        op_kind  = a_hira ? OP_HIRA_ACC : OP_ACT;
        op_row1  = a_hira ? a_ref_row : a_row;
        op_row2  = a_row;
      end
      default: ;
    endcase
  end

  logic [31:0] c_ra, c_rr, c_nom, c_act;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gstate    <= G_IDLE;
      a_bank    <= '0;
      a_row     <= '0;
      a_ref_row <= '0;
      a_hira    <= 1'b0;
      c_ra      <= '0;
      c_rr      <= '0;
      c_nom     <= '0;
      c_act     <= '0;
    end else begin
      unique case (gstate)
        G_IDLE: begin
          if (f_valid && f_ready) begin
            if (f_pair) c_rr  <= c_rr + 1;
            else        c_nom <= c_nom + 1;
          end else if (act_ready) begin
            a_bank <= act_bank;
            a_row  <= act_row;
            gstate <= G_WAIT;
          end
        end
        G_WAIT:
          if (resp_valid) begin
            a_hira    <= resp_hira;
            a_ref_row <= resp_row;
            gstate    <= G_ISSUE;
          end
        G_ISSUE:
          if (op_ready) begin
            if (a_hira) c_ra  <= c_ra + 1;
            else        c_act <= c_act + 1;
            gstate <= G_IDLE;
          end
        default: gstate <= G_IDLE;
      endcase
    end
  end

  always_comb begin
    stats.hira_access     = c_ra;
    stats.hira_refresh    = c_rr;
    stats.nominal_refresh = c_nom;
    stats.plain_act       = c_act;
    stats.periodic_gen    = gen_cnt;
    stats.preventive_q    = prq_cnt;
    stats.preventive_drop = drop_cnt;
    stats.idle_checks     = idle_cnt;
  end

endmodule

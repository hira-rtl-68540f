// refresh_table: the queue of pending refresh requests of one rank.
//
// Each entry holds a deadline (a wrapping DL_W-bit timestamp), the target bank and the
// refresh type (Invalid, Periodic, Preventive), as the HiRA controller's Refresh Table does.
// With tRefSlack = 4 tRC a rank can create at most 4 periodic and 64 preventive requests
// within the slack, hence 68 entries.
//
// Two insert ports (periodic and preventive) take the lowest free entries; each has a
// valid/ready handshake and the table drops nothing: a source waits while the table is full.
// Two remove ports invalidate entries by index (a refresh-refresh HiRA retires two).
//
// Searches are combinational, all entries compared in parallel (a parallel reading of the
// paper's pipelined walk over the table in deadline order):
//   * for the queried bank, the earliest Periodic and the earliest Preventive entry,
//     optionally skipping one excluded index;
//   * rank-wide, the entry with the earliest deadline.
// Time to deadline is rem = deadline - now, taken modulo 2^DL_W; a value above SLACK can
// only mean the deadline has passed, so it is read as negative. Ties go to the lower index.
module refresh_table
  import hira_pkg::*;
#(
  parameter int ENTRIES = hira_pkg::RT_ENTRIES,
  parameter int DL_W    = hira_pkg::DL_W,
  parameter int BANK_W  = hira_pkg::BANK_W,
  parameter int SLACK   = hira_pkg::SLACK_CYC,
  localparam int IDX_W  = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DL_W-1:0]   now,
  // periodic insert
  input  logic              ins_p_valid,
  output logic              ins_p_ready,
  input  logic [BANK_W-1:0] ins_p_bank,
  input  logic [DL_W-1:0]   ins_p_deadline,
  // preventive insert
  input  logic              ins_v_valid,
  output logic              ins_v_ready,
  input  logic [BANK_W-1:0] ins_v_bank,
  input  logic [DL_W-1:0]   ins_v_deadline,
  // removal
  input  logic [1:0]        rm_valid,
  input  logic [IDX_W-1:0]  rm_idx [2],
  // per-bank search
  input  logic [BANK_W-1:0] q_bank,
  input  logic              q_excl_valid,
  input  logic [IDX_W-1:0]  q_excl_idx,
  output logic              q_per_valid,
  output logic [IDX_W-1:0]  q_per_idx,
  output logic signed [DL_W:0] q_per_rem,
  output logic              q_prv_valid,
  output logic [IDX_W-1:0]  q_prv_idx,
  output logic signed [DL_W:0] q_prv_rem,
  // rank-wide earliest deadline
  output logic              g_valid,
  output logic [IDX_W-1:0]  g_idx,
  output logic [BANK_W-1:0] g_bank,
  output rtype_e            g_type,
  output logic signed [DL_W:0] g_rem,
  output logic [IDX_W:0]    occupancy
);

  logic [DL_W-1:0]   dl    [ENTRIES];
  logic [BANK_W-1:0] bk    [ENTRIES];
  rtype_e            ty    [ENTRIES];

  // time to deadline per entry
  logic signed [DL_W:0] rem [ENTRIES];
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      logic [DL_W-1:0] raw;
      raw = dl[i] - now;
      if (int'(raw) > SLACK) rem[i] = $signed({1'b0, raw}) - $signed((DL_W+1)'(1 << DL_W));
      else                   rem[i] = $signed({1'b0, raw});
    end
  end

  // two lowest free entries
  logic              free1_ok, free2_ok;
  logic [IDX_W-1:0]  free1, free2;
  always_comb begin
    free1_ok = 1'b0; free2_ok = 1'b0; free1 = '0; free2 = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (ty[i] == RT_INVALID) begin
        if (!free1_ok)      begin free1_ok = 1'b1; free1 = IDX_W'(i); end
        else if (!free2_ok) begin free2_ok = 1'b1; free2 = IDX_W'(i); end
      end
    end
  end

  assign ins_p_ready = free1_ok;
  assign ins_v_ready = ins_p_valid ? free2_ok : free1_ok;

  logic              do_p, do_v;
  logic [IDX_W-1:0]  slot_v;
  assign do_p   = ins_p_valid && ins_p_ready;
  assign do_v   = ins_v_valid && ins_v_ready;
  assign slot_v = ins_p_valid ? free2 : free1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        ty[i] <= RT_INVALID;
        dl[i] <= '0;
        bk[i] <= '0;
      end
    end else begin
      for (int r = 0; r < 2; r++)
        if (rm_valid[r]) ty[rm_idx[r]] <= RT_INVALID;
      if (do_p) begin
        ty[free1] <= RT_PERIODIC;
        dl[free1] <= ins_p_deadline;
        bk[free1] <= ins_p_bank;
      end
      if (do_v) begin
        ty[slot_v] <= RT_PREVENTIVE;
        dl[slot_v] <= ins_v_deadline;
        bk[slot_v] <= ins_v_bank;
      end
    end
  end

  // searches
  always_comb begin
    q_per_valid = 1'b0; q_per_idx = '0; q_per_rem = '0;
    q_prv_valid = 1'b0; q_prv_idx = '0; q_prv_rem = '0;
    g_valid = 1'b0; g_idx = '0; g_bank = '0; g_type = RT_INVALID; g_rem = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (ty[i] != RT_INVALID) begin
        if (!g_valid || rem[i] < g_rem) begin
          g_valid = 1'b1; g_idx = IDX_W'(i); g_bank = bk[i]; g_type = ty[i]; g_rem = rem[i];
        end
        if (bk[i] == q_bank && !(q_excl_valid && q_excl_idx == IDX_W'(i))) begin
          if (ty[i] == RT_PERIODIC && (!q_per_valid || rem[i] < q_per_rem)) begin
            q_per_valid = 1'b1; q_per_idx = IDX_W'(i); q_per_rem = rem[i];
          end
          if (ty[i] == RT_PREVENTIVE && (!q_prv_valid || rem[i] < q_prv_rem)) begin
            q_prv_valid = 1'b1; q_prv_idx = IDX_W'(i); q_prv_rem = rem[i];
          end
        end
      end
    end
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (ty[i] != RT_INVALID) occupancy = occupancy + 1'b1;
  end

  // A removed entry must be a valid one, and the two removals must differ.
  always_ff @(posedge clk)
    if (rst_n) begin
      for (int r = 0; r < 2; r++)
        assert (!rm_valid[r] || ty[rm_idx[r]] != RT_INVALID)
          else $error("refresh_table: removing an empty entry");
      assert (!(rm_valid == 2'b11 && rm_idx[0] == rm_idx[1]))
        else $error("refresh_table: same entry removed twice");
    end

endmodule

// hira_pkg: types and default sizes shared by the HiRA memory-controller blocks.
//
// The controller works on one DDR4 rank of 16 banks with 64K rows per bank, split into
// 128 subarrays. All times are counted in cycles of a 3 GHz controller clock (0.333 ns),
// the clock the 10-bit deadline field is sized for. Timing values in nanoseconds follow
// DDR4-2400 as used for HiRA (t1 = t2 = 3 ns, tRAS = 32 ns, tRP = 14.25 ns, tRC = 46.25 ns,
// tFAW = 16 ns); each is rounded up to whole cycles. A row address is split as
// {subarray, row-in-subarray}: this row-to-subarray mapping is a choice of this design.
package hira_pkg;

  localparam int NUM_BANKS   = 16;
  localparam int BANK_W      = 4;
  localparam int ROW_W       = 16;     // 64K rows per bank
  localparam int NUM_SA      = 128;    // subarrays per bank
  localparam int SA_W        = 7;
  localparam int ROWS_PER_SA = 512;    // 64K / 128
  localparam int PTR_W       = 10;     // RefPtr entry width (room for 1024 rows per subarray)
  localparam int DL_W        = 10;     // deadline width in the Refresh Table

  // Timing in 3 GHz cycles.
  localparam int T1_CYC      = 9;      // 3 ns, ACT RowA -> PRE
  localparam int T2_CYC      = 9;      // 3 ns, PRE -> ACT RowB
  localparam int TRAS_CYC    = 96;     // 32 ns
  localparam int TRP_CYC     = 43;     // 14.25 ns
  localparam int TRC_CYC     = 139;    // 46.25 ns
  localparam int TFAW_CYC    = 48;     // 16 ns
  localparam int GEN_CYC     = 182;    // 60.9 ns between periodic requests (975 ns / 16 banks), rounded down
  localparam int SLACK_CYC   = 4 * TRC_CYC;  // tRefSlack = 4 tRC

  localparam int RT_ENTRIES  = 68;     // Refresh Table entries per rank
  localparam int PRF_DEPTH   = 4;      // PR-FIFO entries per bank

  // Refresh type, 2 bits as in the Refresh Table.
  typedef enum logic [1:0] {
    RT_INVALID    = 2'd0,
    RT_PERIODIC   = 2'd1,
    RT_PREVENTIVE = 2'd2
  } rtype_e;

  typedef struct packed {
    logic [DL_W-1:0]   deadline;
    logic [BANK_W-1:0] bank;
    rtype_e            rtype;
  } rt_entry_t;

  // Row operations handed to the command sequencer.
  typedef enum logic [2:0] {
    OP_ACT      = 3'd0,  // open row1 for access (nominal ACT)
    OP_HIRA_ACC = 3'd1,  // HiRA: refresh row1 while opening row2 for access
    OP_REF      = 3'd2,  // nominal refresh of row1: ACT, tRAS, PRE
    OP_HIRA_REF = 3'd3,  // HiRA: refresh row1 and row2, then PRE
    OP_PRE      = 3'd4   // close the bank
  } op_e;

  typedef enum logic [1:0] {
    CMD_NOP = 2'd0,
    CMD_ACT = 2'd1,
    CMD_PRE = 2'd2
  } cmd_e;

  // Event counters reported by the controller.
  typedef struct packed {
    logic [31:0] hira_access;     // refreshes hidden behind an access activation (Case 1)
    logic [31:0] hira_refresh;    // refresh-refresh HiRA operations (Case 2, paired)
    logic [31:0] nominal_refresh; // refreshes done alone at their deadline (Case 2, unpaired)
    logic [31:0] plain_act;       // access activations with nothing to hide
    logic [31:0] periodic_gen;    // periodic refresh requests generated
    logic [31:0] preventive_q;    // preventive refresh requests queued
    logic [31:0] preventive_drop; // preventive requests lost to a full PR-FIFO / table
    logic [31:0] idle_checks;     // deadline checks that found nothing due
  } hira_stats_t;

endpackage

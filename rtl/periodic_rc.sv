// periodic_rc: the Periodic Refresh Controller of one rank.
//
// Refresh Generator: instead of one REF command per tREFI for the whole rank, the controller
// refreshes rows one at a time with (HiRA) activations. To refresh 64K rows per bank in 64 ms
// each bank needs one row refresh every 975 ns; to spread the command-bus load, the generator
// creates one request every GEN_PERIOD cycles (60.9 ns = 975 ns / 16 banks) and gives it to
// the banks in turn. A request carries only its bank and its deadline, now + TREFSLACK; which
// row it refreshes is decided later, when the request is served, from the RefPtr Table that
// this controller owns (see refptr_table).
//
// Requests leave through a valid/ready port into the Refresh Table. If the table is full the
// generator keeps counting: requests it owes are kept in `owed` and issued as soon as the
// table accepts them, so none is lost (the deadline is then taken at insertion).
module periodic_rc #(
  parameter int NUM_BANKS   = hira_pkg::NUM_BANKS,
  parameter int NUM_SA      = hira_pkg::NUM_SA,
  parameter int ROWS_PER_SA = hira_pkg::ROWS_PER_SA,
  parameter int PTR_W       = hira_pkg::PTR_W,
  parameter int DL_W        = hira_pkg::DL_W,
  parameter int GEN_PERIOD  = hira_pkg::GEN_CYC,
  parameter int TREFSLACK   = hira_pkg::SLACK_CYC,
  localparam int BANK_W     = $clog2(NUM_BANKS),
  localparam int SA_W       = $clog2(NUM_SA),
  localparam int ROW_W      = SA_W + $clog2(ROWS_PER_SA)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [DL_W-1:0]   now,
  // to the Refresh Table
  output logic              req_valid,
  input  logic              req_ready,
  output logic [BANK_W-1:0] req_bank,
  output logic [DL_W-1:0]   req_deadline,
  // RefPtr Table lookup and advance (used by the refresh finder)
  input  logic [BANK_W-1:0] rp_q_bank,
  input  logic [NUM_SA-1:0] rp_q_mask,
  output logic              rp_q_found,
  output logic [SA_W-1:0]   rp_q_sa,
  output logic [ROW_W-1:0]  rp_q_row,
  input  logic [1:0]        rp_adv_valid,
  input  logic [BANK_W-1:0] rp_adv_bank [2],
  input  logic [SA_W-1:0]   rp_adv_sa   [2],
  // statistics
  output logic [31:0]       generated,
  output logic [BANK_W:0]   windows_done
);

  localparam int CNT_W = $clog2(GEN_PERIOD + 1);

  logic [CNT_W-1:0]  timer;
  logic [3:0]        owed;
  logic [BANK_W-1:0] next_bank;
  logic              tick, take;

  assign tick = enable && (int'(timer) == GEN_PERIOD - 1);
  assign take = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer     <= '0;
      owed      <= '0;
      next_bank <= '0;
      generated <= '0;
    end else begin
      if (enable) timer <= tick ? '0 : timer + 1'b1;
      owed <= owed + 4'(tick) - 4'(take);
      if (take) begin
        next_bank <= (int'(next_bank) == NUM_BANKS - 1) ? '0 : next_bank + 1'b1;
        generated <= generated + 1;
      end
    end
  end

  assign req_valid    = (owed != 0);
  assign req_bank     = next_bank;
  assign req_deadline = now + DL_W'(TREFSLACK);

  refptr_table #(
    .NUM_BANKS(NUM_BANKS), .NUM_SA(NUM_SA), .ROWS_PER_SA(ROWS_PER_SA), .PTR_W(PTR_W)
  ) u_refptr (
    .clk, .rst_n,
    .q_bank(rp_q_bank), .q_mask(rp_q_mask),
    .q_found(rp_q_found), .q_sa(rp_q_sa), .q_row(rp_q_row),
    .adv_valid(rp_adv_valid), .adv_bank(rp_adv_bank), .adv_sa(rp_adv_sa),
    .windows_done
  );

  always_ff @(posedge clk)
    if (rst_n) assert (!(owed == 4'hF && tick && !take)) else $error("periodic_rc: owed counter overflow");

endmodule

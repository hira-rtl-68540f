// preventive_rc: the Preventive Refresh Controller of one rank.
//
// A RowHammer defense (PARA, see para.sv) watches row activations and names victim rows to
// refresh. For each such request the controller, in one cycle,
//   1) appends the row to its bank's PR-FIFO, and
//   2) inserts a Preventive entry for that bank with deadline now + TREFSLACK into the
//      Refresh Table.
// The Refresh Table entry only carries the bank; the row is the head of the bank's PR-FIFO.
// Because every preventive request of a bank gets the same slack, the bank's earliest
// preventive entry always belongs to its PR-FIFO head, so popping the head together with
// removing that entry keeps the two in step.
//
// If the PR-FIFO or the table is full, the request waits in a one-entry holding register;
// a further request that arrives while it waits is dropped and counted in `dropped` (the
// paper sizes both structures so that this cannot happen at tRefSlack = 4 tRC).
module preventive_rc #(
  parameter int NUM_BANKS = hira_pkg::NUM_BANKS,
  parameter int ROW_W     = hira_pkg::ROW_W,
  parameter int DL_W      = hira_pkg::DL_W,
  parameter int DEPTH     = hira_pkg::PRF_DEPTH,
  parameter int TREFSLACK = hira_pkg::SLACK_CYC,
  parameter int PTH_W     = 16,
  localparam int BANK_W   = $clog2(NUM_BANKS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DL_W-1:0]   now,
  input  logic [PTH_W-1:0]  pth,
  // observed row activations
  input  logic              act_valid,
  input  logic [BANK_W-1:0] act_bank,
  input  logic [ROW_W-1:0]  act_row,
  // to the Refresh Table
  output logic              ins_valid,
  input  logic              ins_ready,
  output logic [BANK_W-1:0] ins_bank,
  output logic [DL_W-1:0]   ins_deadline,
  // PR-FIFO heads and pop (from the refresh finder)
  output logic [NUM_BANKS-1:0] head_valid,
  output logic [ROW_W-1:0]     head_row [NUM_BANKS],
  input  logic                 pop_valid,
  input  logic [BANK_W-1:0]    pop_bank,
  // statistics
  output logic [31:0]       queued,
  output logic [31:0]       dropped
);

  logic              pv_valid;
  logic [BANK_W-1:0] pv_bank;
  logic [ROW_W-1:0]  pv_row;

  para #(.BANK_W(BANK_W), .ROW_W(ROW_W), .PTH_W(PTH_W)) u_para (
    .clk, .rst_n, .pth,
    .act_valid, .act_bank, .act_row,
    .ref_valid(pv_valid), .ref_bank(pv_bank), .ref_row(pv_row)
  );

  logic              hold_valid;
  logic [BANK_W-1:0] hold_bank;
  logic [ROW_W-1:0]  hold_row;
  logic [NUM_BANKS-1:0] fifo_full;
  logic              accept;

  assign ins_valid    = hold_valid && !fifo_full[hold_bank];
  assign ins_bank     = hold_bank;
  assign ins_deadline = now + DL_W'(TREFSLACK);
  assign accept       = ins_valid && ins_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_valid <= 1'b0;
      hold_bank  <= '0;
      hold_row   <= '0;
      queued     <= '0;
      dropped    <= '0;
    end else begin
      if (accept) queued <= queued + 1;
      if (pv_valid && (!hold_valid || accept)) begin
        hold_valid <= 1'b1;
        hold_bank  <= pv_bank;
        hold_row   <= pv_row;
      end else begin
        if (accept) hold_valid <= 1'b0;
        if (pv_valid) dropped <= dropped + 1;
      end
    end
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_fifo
    logic [$clog2(DEPTH):0] cnt;
    pr_fifo #(.DEPTH(DEPTH), .ROW_W(ROW_W)) u_fifo (
      .clk, .rst_n,
      .push(accept && hold_bank == BANK_W'(b)), .push_row(hold_row),
      .pop(pop_valid && pop_bank == BANK_W'(b)),
      .head_valid(head_valid[b]), .head_row(head_row[b]),
      .full(fifo_full[b]), .count(cnt)
    );
  end

endmodule

// hira_cmd_seq: turns row operations into DDR4 ACT/PRE commands with HiRA timing.
//
// HiRA (Hidden Row Activation) opens two rows of one bank that lie in electrically isolated
// subarrays, using only standard commands: ACT RowA, then PRE after t1, then ACT RowB after
// t2. The PRE is cut short by the second ACT before RowA's wordline falls, so RowA keeps
// being restored by its own local row buffer while RowB is activated and becomes the row that
// column commands reach. With t1 = t2 = 3 ns, two rows are refreshed in t1 + t2 + tRAS =
// 38 ns instead of tRAS + tRP + tRAS = 78.25 ns. One ordinary PRE later closes both rows.
//
// Operations (op_kind, see hira_pkg::op_e), each on bank op_bank:
//   OP_ACT       ACT row1                                   (row1 left open)
//   OP_HIRA_ACC  ACT row1, t1, PRE, t2, ACT row2            (row1 refreshed, row2 open)
//   OP_REF       ACT row1, tRAS, PRE                        (nominal refresh)
//   OP_HIRA_REF  ACT row1, t1, PRE, t2, ACT row2, tRAS, PRE (two rows refreshed)
//   OP_PRE       PRE if the bank is open
// Before an operation that activates, an open bank is precharged first (after tRAS).
// Nominal rules are kept for every command that is not the inside of a HiRA sequence:
// tRAS (ACT to PRE), tRP (PRE to ACT), tRC (ACT to ACT) per bank and tFAW per rank, where
// both ACTs of a HiRA count and both must fit before the first is issued. The second ACT
// of HiRA deliberately breaks tRP; closing after HiRA waits tRAS from the second ACT, which
// also gives the first row more than tRAS of restoration.
//
// Interface: op_valid/op_ready handshake, one operation at a time (operations on different
// banks are not overlapped: a simplification of this design). One command per cycle on
// cmd/cmd_bank/cmd_row; cmd_access marks the ACT that opens a row for column access.
// op_done pulses in the cycle after an operation's last command (or after acceptance if it
// needs none).
module hira_cmd_seq
  import hira_pkg::*;
#(
  parameter int NUM_BANKS = hira_pkg::NUM_BANKS,
  parameter int ROW_W     = hira_pkg::ROW_W,
  parameter int T1        = hira_pkg::T1_CYC,
  parameter int T2        = hira_pkg::T2_CYC,
  parameter int TRAS      = hira_pkg::TRAS_CYC,
  parameter int TRP       = hira_pkg::TRP_CYC,
  parameter int TRC       = hira_pkg::TRC_CYC,
  parameter int TFAW      = hira_pkg::TFAW_CYC,
  localparam int BANK_W   = $clog2(NUM_BANKS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  output logic              op_ready,
  input  op_e               op_kind,
  input  logic [BANK_W-1:0] op_bank,
  input  logic [ROW_W-1:0]  op_row1,
  input  logic [ROW_W-1:0]  op_row2,
  output cmd_e              cmd,
  output logic [BANK_W-1:0] cmd_bank,
  output logic [ROW_W-1:0]  cmd_row,
  output logic              cmd_access,
  output logic              op_done,
  output logic [NUM_BANKS-1:0] bank_open
);

  localparam int SAT   = (TRC > TRAS ? TRC : TRAS) + 1;
  localparam int CNT_W = $clog2(SAT + 1);

  typedef enum logic [2:0] {S_IDLE, S_PRE0, S_ACT1, S_MIDPRE, S_ACT2, S_CLOSE} state_e;
  state_e state;

  op_e               l_kind;
  logic [BANK_W-1:0] l_bank;
  logic [ROW_W-1:0]  l_row1, l_row2;
  logic [CNT_W-1:0]  since_cmd;                 // cycles since this operation's last command
  logic [CNT_W-1:0]  since_act [NUM_BANKS];
  logic [CNT_W-1:0]  since_pre [NUM_BANKS];

  logic faw_ok_act, faw_ok_pair, act_now;
  faw_limiter #(.TFAW(TFAW), .PAIR_GAP(T1 + T2)) u_faw (
    .clk, .rst_n, .act(act_now), .can_act(faw_ok_act), .can_pair(faw_ok_pair)
  );

  logic is_hira;
  assign is_hira = (l_kind == OP_HIRA_ACC) || (l_kind == OP_HIRA_REF);

  // command decision for this cycle
  always_comb begin
    cmd        = CMD_NOP;
    cmd_bank   = l_bank;
    cmd_row    = l_row1;
    cmd_access = 1'b0;
    unique case (state)
      S_PRE0:
        if (int'(since_act[l_bank]) >= TRAS) cmd = CMD_PRE;
      S_ACT1:
        if (int'(since_pre[l_bank]) >= TRP && int'(since_act[l_bank]) >= TRC &&
            (is_hira ? faw_ok_pair : faw_ok_act)) begin
          cmd        = CMD_ACT;
          cmd_access = (l_kind == OP_ACT);
        end
      S_MIDPRE:
        if (int'(since_cmd) >= T1) cmd = CMD_PRE;
      S_ACT2:
        if (int'(since_cmd) >= T2) begin
          cmd        = CMD_ACT;
          cmd_row    = l_row2;
          cmd_access = (l_kind == OP_HIRA_ACC);
        end
      S_CLOSE:
        if (int'(since_act[l_bank]) >= TRAS) cmd = CMD_PRE;
      default: ;
    endcase
  end

  assign act_now  = (cmd == CMD_ACT);
  assign op_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      l_kind    <= OP_ACT;
      l_bank    <= '0;
      l_row1    <= '0;
      l_row2    <= '0;
      since_cmd <= '0;
      op_done   <= 1'b0;
      bank_open <= '0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        since_act[b] <= CNT_W'(SAT);
        since_pre[b] <= CNT_W'(SAT);
      end
    end else begin
      op_done <= 1'b0;
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (int'(since_act[b]) < SAT) since_act[b] <= since_act[b] + 1'b1;
        if (int'(since_pre[b]) < SAT) since_pre[b] <= since_pre[b] + 1'b1;
      end
      if (int'(since_cmd) < SAT) since_cmd <= since_cmd + 1'b1;
      if (cmd == CMD_ACT) begin
        since_act[l_bank] <= CNT_W'(1);
        bank_open[l_bank] <= 1'b1;
        since_cmd         <= CNT_W'(1);
      end
      if (cmd == CMD_PRE) begin
        since_pre[l_bank] <= CNT_W'(1);
        bank_open[l_bank] <= 1'b0;
        since_cmd         <= CNT_W'(1);
      end

      unique case (state)
        S_IDLE:
          if (op_valid) begin
            l_kind <= op_kind;
            l_bank <= op_bank;
            l_row1 <= op_row1;
            l_row2 <= op_row2;
            if (op_kind == OP_PRE) begin
              if (bank_open[op_bank]) state <= S_CLOSE;
              else                    op_done <= 1'b1;
            end else begin
              state <= bank_open[op_bank] ? S_PRE0 : S_ACT1;
            end
          end
        S_PRE0:
          if (cmd == CMD_PRE) state <= S_ACT1;
        S_ACT1:
          if (cmd == CMD_ACT) begin
            unique case (l_kind)
              OP_ACT:                   begin state <= S_IDLE; op_done <= 1'b1; end
              OP_REF:                   state <= S_CLOSE;
              default:                  state <= S_MIDPRE;   // the two HiRA kinds
            endcase
          end
        S_MIDPRE:
          if (cmd == CMD_PRE) state <= S_ACT2;
        S_ACT2:
          if (cmd == CMD_ACT) begin
            if (l_kind == OP_HIRA_REF) state <= S_CLOSE;
            else begin state <= S_IDLE; op_done <= 1'b1; end
          end
        S_CLOSE:
          if (cmd == CMD_PRE) begin state <= S_IDLE; op_done <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

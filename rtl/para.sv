// para: Probabilistic Row Activation, the RowHammer defense that feeds the preventive
// refresh controller.
//
// On every observed row activation (act_valid, act_bank, act_row) PARA draws a random
// number and, with probability p_th, asks for a preventive refresh of one of the two rows
// adjacent to the activated row, each with probability 1/2 (so each neighbour is refreshed
// with p_th/2). The row at either end of the bank has one neighbour, which is then chosen.
// p_th is programmable (pth, an unsigned fraction of 2^PTH_W); it must be raised to cover the
// extra activations an attacker can make while a refresh waits in the queue for up to
// tRefSlack (see the README for the formula).
//
// The random source is a 32-bit Galois LFSR stepped every cycle (this design's choice; the
// paper does not say how randomness is produced). Output is registered: the request appears
// one cycle after the activation.
module para #(
  parameter int BANK_W = hira_pkg::BANK_W,
  parameter int ROW_W  = hira_pkg::ROW_W,
  parameter int PTH_W  = 16,
  parameter logic [31:0] SEED = 32'h1D87_2B41
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PTH_W-1:0]  pth,        // probability threshold, p_th * 2^PTH_W
  input  logic              act_valid,
  input  logic [BANK_W-1:0] act_bank,
  input  logic [ROW_W-1:0]  act_row,
  output logic              ref_valid,
  output logic [BANK_W-1:0] ref_bank,
  output logic [ROW_W-1:0]  ref_row
);

  logic [31:0] lfsr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lfsr <= SEED;
    else        lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'hA300_0000 : 32'h0);
  end

  logic             hit, up;
  logic [ROW_W-1:0] victim;
  always_comb begin
    hit = lfsr[PTH_W-1:0] < pth;
    up  = lfsr[31];
    if (act_row == '0)        victim = act_row + 1'b1;
    else if (&act_row)        victim = act_row - 1'b1;
    else if (up)              victim = act_row + 1'b1;
    else                      victim = act_row - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_valid <= 1'b0;
      ref_bank  <= '0;
      ref_row   <= '0;
    end else begin
      ref_valid <= act_valid && hit;
      if (act_valid && hit) begin
        ref_bank <= act_bank;
        ref_row  <= victim;
      end
    end
  end

endmodule

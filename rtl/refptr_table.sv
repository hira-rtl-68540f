// refptr_table: per-subarray refresh pointers of one rank (the RefPtr Table).
//
// Periodic refresh walks each subarray separately so that a refresh can be placed in any
// subarray that is isolated from the row being accessed. Each of the NUM_BANKS x NUM_SA
// entries points to the next row to refresh in its subarray. A subarray whose rows have all
// been refreshed in the current refresh window is marked done; when every subarray of a
// bank is done, the bank's pointers restart at zero (a new window). The done flags and the
// restart rule are this design's way of keeping one refresh per row per window.
//
// Lookup (combinational): for bank q_bank and a mask of allowed subarrays, return the
// allowed, not-done subarray with the fewest rows refreshed so far (the smallest pointer;
// lowest index on ties) and the row address {subarray, pointer}. The paper asks for exactly
// this choice, to advance all pointers in a balanced way.
// Advance (two ports, registered): step the pointer of (bank, subarray) after its row has
// been refreshed. The two ports must name different entries.
module refptr_table
  import hira_pkg::*;
#(
  parameter int NUM_BANKS   = hira_pkg::NUM_BANKS,
  parameter int NUM_SA      = hira_pkg::NUM_SA,
  parameter int ROWS_PER_SA = hira_pkg::ROWS_PER_SA,
  parameter int PTR_W       = hira_pkg::PTR_W,
  localparam int BANK_W     = $clog2(NUM_BANKS),
  localparam int SA_W       = $clog2(NUM_SA),
  localparam int ROWB_W     = $clog2(ROWS_PER_SA),
  localparam int ROW_W      = SA_W + ROWB_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // lookup
  input  logic [BANK_W-1:0] q_bank,
  input  logic [NUM_SA-1:0] q_mask,
  output logic              q_found,
  output logic [SA_W-1:0]   q_sa,
  output logic [ROW_W-1:0]  q_row,
  // advance
  input  logic [1:0]        adv_valid,
  input  logic [BANK_W-1:0] adv_bank [2],
  input  logic [SA_W-1:0]   adv_sa   [2],
  // number of banks that started a new refresh window (for statistics)
  output logic [BANK_W:0]   windows_done
);

  logic [PTR_W-1:0]  ptr  [NUM_BANKS][NUM_SA];
  logic [NUM_SA-1:0] done [NUM_BANKS];

  always_comb begin
    logic [PTR_W-1:0] best;
    q_found = 1'b0;
    q_sa    = '0;
    best    = '0;
    for (int s = 0; s < NUM_SA; s++) begin
      if (q_mask[s] && !done[q_bank][s]) begin
        if (!q_found || ptr[q_bank][s] < best) begin
          q_found = 1'b1;
          q_sa    = SA_W'(s);
          best    = ptr[q_bank][s];
        end
      end
    end
    q_row = {q_sa, ROWB_W'(best)};
  end

  // next state of the done flags, per bank, before the window restart
  logic [NUM_SA-1:0] done_nxt [NUM_BANKS];
  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++) done_nxt[b] = done[b];
    for (int a = 0; a < 2; a++)
      if (adv_valid[a] && int'(ptr[adv_bank[a]][adv_sa[a]]) == ROWS_PER_SA - 1)
        done_nxt[adv_bank[a]][adv_sa[a]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        done[b] <= '0;
        for (int s = 0; s < NUM_SA; s++) ptr[b][s] <= '0;
      end
      windows_done <= '0;
    end else begin
      for (int a = 0; a < 2; a++)
        if (adv_valid[a]) begin
          if (int'(ptr[adv_bank[a]][adv_sa[a]]) == ROWS_PER_SA - 1)
            ptr[adv_bank[a]][adv_sa[a]] <= '0;
          else
            ptr[adv_bank[a]][adv_sa[a]] <= ptr[adv_bank[a]][adv_sa[a]] + 1'b1;
        end
      for (int b = 0; b < NUM_BANKS; b++) begin
        if (&done_nxt[b]) begin
          done[b] <= '0;          // every subarray refreshed: new window for this bank
          windows_done <= windows_done + 1'b1;
        end else begin
          done[b] <= done_nxt[b];
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (rst_n) begin
      for (int a = 0; a < 2; a++)
        assert (!adv_valid[a] || !done[adv_bank[a]][adv_sa[a]])
          else $error("refptr_table: advancing a subarray that is already done");
      assert (!(adv_valid == 2'b11 && adv_bank[0] == adv_bank[1] && adv_sa[0] == adv_sa[1]))
        else $error("refptr_table: both ports advance the same subarray");
    end

endmodule

// spt: Subarray Pairs Table.
//
// For each subarray S of a bank, a NUM_SA-bit vector whose bit T is set when S and T share
// no bitline and no sense amplifier, so that HiRA may open a row of S and a row of T
// together. Which pairs qualify is a property of the DRAM chip's circuit design, found once
// by testing (or read from the chip) and then written here; the table is the same for all
// banks because the qualifying pairs were found to be identical across banks.
// Stored as a plain register array (an on-chip SRAM in a real controller).
//
// Interface: one write port (a whole vector per subarray, taking effect at the next clock
// edge) and two combinational read ports. Reset clears the table: no pair is usable until
// software programs it, so an unprogrammed table only turns HiRA off.
module spt #(
  parameter int NUM_SA = hira_pkg::NUM_SA,
  localparam int SA_W  = $clog2(NUM_SA)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [SA_W-1:0]   wr_sa,
  input  logic [NUM_SA-1:0] wr_vec,
  input  logic [SA_W-1:0]   rd_sa  [2],
  output logic [NUM_SA-1:0] rd_vec [2]
);

  logic [NUM_SA-1:0] tbl [NUM_SA];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_SA; i++) tbl[i] <= '0;
    end else if (wr_en) begin
      tbl[wr_sa] <= wr_vec;
    end
  end

  always_comb
    for (int r = 0; r < 2; r++) rd_vec[r] = tbl[rd_sa[r]];

endmodule

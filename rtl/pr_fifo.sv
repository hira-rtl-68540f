// pr_fifo: the PR-FIFO of one bank, a first-in first-out queue of row addresses waiting for
// a preventive refresh.
//
// DEPTH entries (4 in the paper's sizing: one preventive refresh per activation, at most 4
// activations of a bank within tRefSlack = 4 tRC). Push and pop may happen in the same cycle.
// The head is visible combinationally (head_valid / head_row) so the refresh finder can test
// it against the subarray of the row being activated. Push when full and pop when empty are
// errors (asserted); the producer checks `full` first.
module pr_fifo #(
  parameter int DEPTH = hira_pkg::PRF_DEPTH,
  parameter int ROW_W = hira_pkg::ROW_W,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [ROW_W-1:0] push_row,
  input  logic             pop,
  output logic             head_valid,
  output logic [ROW_W-1:0] head_row,
  output logic             full,
  output logic [AW:0]      count
);

  logic [ROW_W-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= push_row;
        wr_ptr      <= inc(wr_ptr);
      end
      if (pop) rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  assign head_valid = (count != 0);
  assign head_row   = mem[rd_ptr];
  assign full       = (int'(count) == DEPTH);

  always_ff @(posedge clk)
    if (rst_n) begin
      assert (!(push && full && !pop)) else $error("pr_fifo: push while full");
      assert (!(pop && !head_valid))   else $error("pr_fifo: pop while empty");
    end

endmodule

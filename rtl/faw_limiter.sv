// faw_limiter: the four-activation window (tFAW) of one rank.
//
// Every activation counts, including both activations of a HiRA operation. The limiter
// keeps the ages (cycles since) of the last four activations. `can_act` says an activation
// may be issued now: the fourth-latest is at least TFAW cycles old. `can_pair` says a HiRA
// operation may start now, i.e. that a second activation PAIR_GAP cycles after the first will
// also be legal (the third-latest is then at least TFAW old); HiRA's second activation cannot
// be postponed without breaking the operation, so both are checked before the first.
// `act` records an activation issued in this cycle.
module faw_limiter #(
  parameter int TFAW     = hira_pkg::TFAW_CYC,
  parameter int PAIR_GAP = hira_pkg::T1_CYC + hira_pkg::T2_CYC,
  localparam int AGE_W   = $clog2(TFAW + 1)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic act,
  output logic can_act,
  output logic can_pair
);

  // age[0] is the latest activation. Ages saturate at TFAW ("long ago").
  logic [AGE_W-1:0] age [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) age[i] <= AGE_W'(TFAW);
    end else begin
      for (int i = 0; i < 4; i++) begin
        logic [AGE_W-1:0] older;
        older = (int'(age[i]) >= TFAW) ? AGE_W'(TFAW) : age[i] + 1'b1;
        if (act) age[i] <= (i == 0) ? AGE_W'(1) : ((int'(age[i-1]) >= TFAW) ? AGE_W'(TFAW) : age[i-1] + 1'b1);
        else     age[i] <= older;
      end
    end
  end

  assign can_act  = int'(age[3]) >= TFAW;
  assign can_pair = can_act && (int'(age[2]) + PAIR_GAP >= TFAW);

  always_ff @(posedge clk)
    if (rst_n) assert (!act || can_act) else $error("faw_limiter: activation violates tFAW");

endmodule

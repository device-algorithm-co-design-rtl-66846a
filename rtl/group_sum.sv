// group_sum: summation unit (Sum) of one column group. It adds the signed
// per-phase results of the S&A into the group's partial E_inc.
//
// The phases with a negative sign product (row and column signs differ) are
// subtracted: on a cycle with add high, sum <= sum + partial, or
// sum - partial when negate is high. clear zeroes the sum (clear wins).
// Registered output, ADC_FRAC fraction bits. Summing the separately computed
// positive and negative components follows the paper; doing it per group in
// the Sum unit is this design's choice.
module group_sum
  import annealer_pkg::*;
#(
  parameter int N_ROWS = N_SPINS,
  parameter int K      = K_BITS,
  localparam int SW    = sa_w(N_ROWS, K),
  localparam int GW    = gs_w(N_ROWS, K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 add,
  input  logic                 negate,
  input  logic signed [SW-1:0] partial,
  output logic signed [GW-1:0] sum
);

  logic signed [GW-1:0] ext;

  assign ext = GW'(partial);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sum <= '0;
    else if (clear) sum <= '0;
    else if (add)   sum <= negate ? sum - ext : sum + ext;
  end

endmodule

// shift_add: shift-and-add unit (S&A) of one column group. It combines the K
// ADC codes of a J entry's bit columns into one signed number.
//
// J is stored in two's complement, so column b carries weight 2^b and column
// K-1 weight -2^(K-1). Each cycle with en high adds code * weight(bit_idx) to
// the accumulator; clear zeroes it (clear wins over en). acc is a registered,
// signed fixed-point value with the ADC's ADC_FRAC fraction bits. The S&A per
// group is the paper's; the two's-complement weighting is this design's
// choice.
module shift_add
  import annealer_pkg::*;
#(
  parameter int N_ROWS = N_SPINS,
  parameter int K      = K_BITS,
  localparam int AW    = adc_w(N_ROWS),
  localparam int SW    = sa_w(N_ROWS, K),
  localparam int BIT_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                en,
  input  logic [BIT_W-1:0]    bit_idx,
  input  logic [AW-1:0]       code,
  output logic signed [SW-1:0] acc
);

  logic signed [SW-1:0] term;

  always_comb begin
    term = $signed({{(SW-AW){1'b0}}, code}) <<< bit_idx;
    if (int'(bit_idx) == K - 1) term = -term;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clear)  acc <= '0;
    else if (en)     acc <= acc + term;
  end

endmodule

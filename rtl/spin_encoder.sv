// spin_encoder: FG and DL encoders of the crossbar. They turn the ternary
// vectors sigma_r (unflipped spins of sigma_new) and sigma_c (flipped spins of
// sigma_new) into the binary levels that drive the front gates and data lines.
//
// The array only accepts non-negative inputs, so E_inc is computed in four
// phases, one per sign combination (see annealer_pkg::phase_e). In a phase
// with signs (sr, sc), row i is driven when sigma_r[i] is non-zero with sign
// sr, and the K data lines of column group j are all driven when sigma_c[j]
// is non-zero with sign sc. With en low everything is off. The outputs are
// combinational. Splitting positive and negative components and summing them
// afterwards follows the paper; the four-phase order is this design's choice.
module spin_encoder
  import annealer_pkg::*;
#(
  parameter int N = N_SPINS,
  parameter int K = K_BITS
) (
  input  logic          en,
  input  phase_e        phase,
  input  tspin_t [N-1:0] sigma_r,
  input  tspin_t [N-1:0] sigma_c,
  output logic [N-1:0]   fg,
  output logic [N*K-1:0] dl
);

  logic row_neg, col_neg;

  always_comb begin
    row_neg = (phase == PH_NP) || (phase == PH_NN);
    col_neg = (phase == PH_PN) || (phase == PH_NN);
    for (int i = 0; i < N; i++) begin
      fg[i] = en && sigma_r[i].nz && (sigma_r[i].neg == row_neg);
      dl[i*K +: K] = {K{en && sigma_c[i].nz && (sigma_c[i].neg == col_neg)}};
    end
  end

endmodule

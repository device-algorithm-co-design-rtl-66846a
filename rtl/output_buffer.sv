// output_buffer: aggregation of all column groups and the output buffer that
// holds the final E_inc value.
//
// When load is high the sum of every group's partial result is registered in
// einc and valid rises for one cycle; einc then holds until the next load.
// einc is signed with ADC_FRAC fraction bits, in units of one cell's
// normalized current. The aggregation and the buffer are the paper's; a plain
// adder over all groups is this design's choice.
module output_buffer
  import annealer_pkg::*;
#(
  parameter int N_GROUPS = N_SPINS,
  parameter int K        = K_BITS,
  localparam int GW      = gs_w(N_GROUPS, K),
  localparam int EW      = einc_w(N_GROUPS, K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic signed [GW-1:0] group_sums [N_GROUPS],
  output logic signed [EW-1:0] einc,
  output logic                 valid
);

  logic signed [EW-1:0] total;

  always_comb begin
    total = '0;
    for (int g = 0; g < N_GROUPS; g++) total += EW'(group_sums[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      einc  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= load;
      if (load) einc <= total;
    end
  end

endmodule

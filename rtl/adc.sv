// adc: behavioural model (not synthesizable logic) of the current-input ADC
// that digitizes one source-line current per conversion.
//
// On a clock edge with start high it samples i_in and, one cycle later,
// presents code = round(i_in / LSB) with valid high for one cycle. The LSB is
// 1/2^ADC_FRAC of one cell's current scale (I_ON_UA), and the code width
// W = clog2(N_ROWS+1) + ADC_FRAC + 1 bits covers a column with every cell
// selected and storing '1', so codes saturate only outside the model's range.
// The multiplexed ADC per column group is the paper's; its resolution and
// one-cycle latency are this model's choices.
module adc
  import annealer_pkg::*;
#(
  parameter int N_ROWS = N_SPINS,
  localparam int W = adc_w(N_ROWS)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  real          i_in,
  output logic [W-1:0] code,
  output logic         valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= start;
      if (start) code <= W'(adc_transfer(i_in, W));
    end
  end

endmodule

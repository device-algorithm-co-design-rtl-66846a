// sl_mux: behavioural model (not synthesizable logic) of the K-to-1 analog
// multiplexer that connects one of the K source lines of a column group to
// the group's ADC.
//
// i_out = i_in[sel] while en is high, 0 A otherwise (the ADC input is
// disconnected when the group is idle). An ideal switch with no settling time
// is this model's choice; the sharing of one MUX by K columns is the paper's.
module sl_mux
  import annealer_pkg::*;
#(
  parameter int K = K_BITS,
  localparam int SEL_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic             en,
  input  logic [SEL_W-1:0] sel,
  input  real              i_in [K],
  output real              i_out
);

  always_comb begin
    i_out = 0.0;
    if (en && int'(sel) < K) i_out = i_in[sel];
  end

endmodule

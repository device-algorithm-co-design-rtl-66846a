// readout_group: the output chain of one column group of the crossbar: the
// K-to-1 MUX, the ADC, the shift-and-add unit and the Sum unit.
//
// The K source-line currents of the group enter as i_sl; the controller's
// shared strobes (mux_sel, adc_start, sa_*, sum_*) step every group in
// lock-step, and sum presents the group's partial E_inc once all four phases
// have been added. Timing is that of crossbar_ctrl. The chain and its
// sharing by K columns follow the paper.
//
// active tells the group whether its data lines are driven in the current
// phase, i.e. whether its column belongs to a flipped spin of the matching
// sign. Only active groups run their MUX and ADC; an idle group converts
// nothing, its S&A adds nothing and its partial result stays zero. This
// follows the paper's point that only the columns of updated spins are
// activated; the gating signal itself is this design's.
module readout_group
  import annealer_pkg::*;
#(
  parameter int N_ROWS = N_SPINS,
  parameter int K      = K_BITS,
  localparam int BIT_W = (K > 1) ? $clog2(K) : 1,
  localparam int SW    = sa_w(N_ROWS, K),
  localparam int GW    = gs_w(N_ROWS, K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  real                  i_sl [K],
  input  logic                 active,
  input  logic                 mux_en,
  input  logic [BIT_W-1:0]     mux_sel,
  input  logic                 adc_start,
  input  logic                 sa_clear,
  input  logic                 sa_en,
  input  logic [BIT_W-1:0]     sa_bit,
  input  logic                 sum_clear,
  input  logic                 sum_add,
  input  logic                 sum_negate,
  output logic signed [GW-1:0] sum
);

  real                        i_sel;
  logic [adc_w(N_ROWS)-1:0]   code;
  logic                       code_valid;
  logic signed [SW-1:0]       partial;

  sl_mux #(.K(K)) u_mux (
    .en(mux_en && active), .sel(mux_sel), .i_in(i_sl), .i_out(i_sel)
  );

  adc #(.N_ROWS(N_ROWS)) u_adc (
    .clk, .rst_n, .start(adc_start && active), .i_in(i_sel), .code, .valid(code_valid)
  );

  shift_add #(.N_ROWS(N_ROWS), .K(K)) u_sa (
    .clk, .rst_n, .clear(sa_clear), .en(sa_en && code_valid),
    .bit_idx(sa_bit), .code, .acc(partial)
  );

  group_sum #(.N_ROWS(N_ROWS), .K(K)) u_sum (
    .clk, .rst_n, .clear(sum_clear), .add(sum_add), .negate(sum_negate),
    .partial, .sum
  );

endmodule

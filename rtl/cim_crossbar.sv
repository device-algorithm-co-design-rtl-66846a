// cim_crossbar: the DG FeFET-based compute-in-memory crossbar with all of its
// peripherals. It computes E_inc = sigma_r^T * J * sigma_c * f(T) in place.
//
// Each J entry sits in K cells of one row. sigma_r drives the front gates,
// sigma_c the data lines, and the temperature sets one back-gate voltage for
// the whole array. Each cell's current is therefore a four-input product:
// FG level, stored bit, DL level and f(T). The array only takes non-negative
// inputs, so the controller runs four sign phases. Within a phase every
// column group (one per spin) works in parallel: its K source lines are
// converted one at a time by a MUX and an ADC, weighted by bit position in
// the S&A and accumulated with the phase's sign in the Sum. The output buffer
// adds all groups. Only columns of flipped spins carry current, and only
// the groups whose data lines are driven in a phase run their MUX and ADC
// (|F| groups at most), so the conversions scale with the flipped spins,
// not with the array width.
//
// Interface: a start pulse (only while busy is low) samples sigma_r, sigma_c
// and temp, which must stay stable until done. done pulses 4*(2K+2)+2 cycles
// later with einc valid; einc holds until the next computation. einc is
// signed with ADC_FRAC fraction bits, in units of one cell's normalized
// current. prog_* writes one K-bit J entry per cycle while idle.
// Structure and dataflow follow the paper; the schedule, number formats and
// write port are this design's choices.
module cim_crossbar
  import annealer_pkg::*;
#(
  parameter int N = N_SPINS,
  parameter int K = K_BITS,
  localparam int IDX_W = $clog2(N),
  localparam int BIT_W = (K > 1) ? $clog2(K) : 1,
  localparam int GW    = gs_w(N, K),
  localparam int EW    = einc_w(N, K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // J load
  input  logic                 prog_we,
  input  logic [IDX_W-1:0]     prog_row,
  input  logic [IDX_W-1:0]     prog_col,
  input  logic [K-1:0]         prog_data,
  // computation
  input  logic                 start,
  input  tspin_t [N-1:0]       sigma_r,
  input  tspin_t [N-1:0]       sigma_c,
  input  logic [TEMP_W-1:0]    temp,
  output logic                 busy,
  output logic                 done,
  output logic signed [EW-1:0] einc
);

  logic             bg_load, drive_en, mux_en, adc_start;
  logic             sa_clear, sa_en, sum_clear, sum_add, sum_negate, buf_load;
  logic             buf_valid;
  phase_e           phase;
  logic [BIT_W-1:0] mux_sel, sa_bit;
  logic [N-1:0]     fg;
  logic [N*K-1:0]   dl;
  logic [VBG_W-1:0] vbg_code;
  real              vbg_v;
  real              i_sl [N*K];
  logic signed [GW-1:0] group_sums [N];

  crossbar_ctrl #(.K(K)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .bg_load, .drive_en, .phase,
    .mux_en, .mux_sel, .adc_start, .sa_clear, .sa_en, .sa_bit,
    .sum_clear, .sum_add, .sum_negate, .buf_load
  );

  spin_encoder #(.N(N), .K(K)) u_spin_enc (
    .en(drive_en), .phase, .sigma_r, .sigma_c, .fg, .dl
  );

  bg_encoder u_bg_enc (
    .clk, .rst_n, .load(bg_load), .temp, .vbg_code
  );

  bg_driver u_bg_drv (
    .vbg_code, .vbg_v
  );

  dgfefet_array #(.N_ROWS(N), .K(K)) u_array (
    .clk, .prog_we(prog_we && !busy), .prog_row, .prog_col, .prog_data,
    .fg, .dl, .vbg_v, .i_sl
  );

  for (genvar g = 0; g < N; g++) begin : g_grp
    real i_grp [K];
    always_comb begin
      for (int b = 0; b < K; b++) i_grp[b] = i_sl[g*K + b];
    end
    readout_group #(.N_ROWS(N), .K(K)) u_grp (
      .clk, .rst_n, .i_sl(i_grp), .active(dl[g*K]), .mux_en, .mux_sel, .adc_start,
      .sa_clear, .sa_en, .sa_bit, .sum_clear, .sum_add, .sum_negate,
      .sum(group_sums[g])
    );
  end

  output_buffer #(.N_GROUPS(N), .K(K)) u_obuf (
    .clk, .rst_n, .load(buf_load), .group_sums, .einc, .valid(buf_valid)
  );

  // The buffer's valid and the controller's done mark the same cycle.
  a_done_valid: assert property (@(posedge clk) disable iff (!rst_n)
    done == buf_valid);
  // A new computation is only started while idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule

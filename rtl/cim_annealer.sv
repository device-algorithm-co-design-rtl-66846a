// cim_annealer: top level of the ferroelectric compute-in-memory (CiM)
// in-situ annealer for Ising-model combinatorial optimization.
//
// The annealer searches for spins sigma in {-1,+1}^N that minimize
// E = sigma^T J sigma. Instead of recomputing E for every trial solution
// (an N^2-term vector-matrix-vector product) and evaluating exp(-dE/T), it
// flips a fixed number of spins and computes only the change, in the
// incremental form E_inc = sigma_r^T J sigma_c * f(T), whose sign and size
// decide acceptance directly. That needs (N-|F|)*|F| products per
// iteration. The product is formed inside a double-gate FeFET crossbar. The
// annealing factor f(T) enters through the common back-gate voltage.
// Cooling therefore means lowering that voltage from 0.7 V to 0 V.
//
// Blocks: annealing_logic (random init, flip selection, acceptance,
// temperature schedule) and cim_crossbar (array, encoders, BG driver, MUX,
// ADC, S&A, Sum, output buffer, controller).
//
// Use: with busy low, write J through prog_* (one K-bit two's-complement
// entry J[prog_row][prog_col] per cycle; write both J_ij and J_ji for a
// symmetric problem; unused spins keep zero couplings). Pulse start with
// seed, iters_per_step and n_active (number of spins of the problem, 2..N)
// set. The
// annealer runs 70 * iters_per_step iterations (V_BG 0.70 V down to 0.01 V),
// then raises done; sigma (1 = +1) is the solution. Each iteration takes
// about 80 cycles for K = 8. obs_* report every decided iteration.
module cim_annealer
  import annealer_pkg::*;
#(
  parameter int N = N_SPINS,
  parameter int K = K_BITS,
  parameter int T = T_FLIP,
  localparam int IDX_W = $clog2(N),
  localparam int EW    = einc_w(N, K)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 prog_we,
  input  logic [IDX_W-1:0]     prog_row,
  input  logic [IDX_W-1:0]     prog_col,
  input  logic [K-1:0]         prog_data,
  input  logic                 start,
  input  logic [31:0]          seed,
  input  logic [31:0]          iters_per_step,
  input  logic [IDX_W:0]       n_active,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0]         sigma,
  output logic [TEMP_W-1:0]    temp,
  output logic                 obs_valid,
  output logic                 obs_accept,
  output logic                 obs_uphill,
  output logic                 obs_redraw,
  output logic                 obs_temp_dec,
  output logic signed [EW-1:0] obs_einc,
  output logic [IDX_W-1:0]     obs_flip_idx [T],
  output logic [31:0]          iter_count,
  output logic [31:0]          accept_count
);

  logic           xbar_start, xbar_busy, xbar_done;
  tspin_t [N-1:0] sigma_r, sigma_c;

  annealing_logic #(.N(N), .K(K), .T(T)) u_logic (
    .clk, .rst_n, .start, .seed, .iters_per_step, .n_active, .busy, .done,
    .sigma,
    .xbar_start, .sigma_r, .sigma_c, .temp, .xbar_done, .einc(obs_einc),
    .obs_valid, .obs_accept, .obs_uphill, .obs_redraw, .obs_temp_dec,
    .obs_flip_idx, .iter_count, .accept_count
  );

  cim_crossbar #(.N(N), .K(K)) u_xbar (
    .clk, .rst_n, .prog_we(prog_we && !busy), .prog_row, .prog_col,
    .prog_data, .start(xbar_start), .sigma_r, .sigma_c, .temp,
    .busy(xbar_busy), .done(xbar_done), .einc(obs_einc)
  );

  // The annealing logic only starts the crossbar when it is idle.
  a_xbar_idle: assert property (@(posedge clk) disable iff (!rst_n)
    xbar_start |-> !xbar_busy);

endmodule

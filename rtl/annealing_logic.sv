// annealing_logic: the tunable back-gate (BG) based in-situ annealing logic.
// It runs the annealing loop around the crossbar and holds the solution.
//
// Loop, per iteration:
//  1. pick T_FLIP distinct spins (sigma_f) and form sigma_new = sigma with
//     those spins flipped;
//  2. present sigma_r = sigma_new on unflipped spins (0 on flipped ones) and
//     sigma_c = sigma_new on flipped spins (0 elsewhere), together with the
//     temperature, and start the crossbar;
//  3. when E_inc returns: accept sigma_new if E_inc <= 0, or if
//     0 < E_inc <= r with r a fresh random number in [0,1); else keep sigma;
//  4. report the iteration to the schedule, which may lower T.
// The loop ends when the schedule reaches T = 0 (V_BG = 0 V). On start the
// spins are first set at random, 32 per cycle.
//
// Interface: start (while not busy) loads seed and runs one whole anneal
// over spins 0..n_active-1 (the others never flip);
// busy is high meanwhile and done rises at the end and stays high until the
// next start. sigma (1 = +1) is the solution. The obs_* outputs describe the
// iteration decided in the cycle where obs_valid is high.
// The loop, the derivation of sigma_r/sigma_c and the two-step acceptance
// test follow the paper. r as an ADC_FRAC-bit fraction in [0,1), the
// generator and the schedule start value are this design's choices.
module annealing_logic
  import annealer_pkg::*;
#(
  parameter int N = N_SPINS,
  parameter int K = K_BITS,
  parameter int T = T_FLIP,
  localparam int IDX_W = $clog2(N),
  localparam int EW    = einc_w(N, K),
  localparam int NW    = (N + 31) / 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          seed,
  input  logic [31:0]          iters_per_step,
  input  logic [IDX_W:0]       n_active,
  output logic                 busy,
  output logic                 done,
  output logic [N-1:0]         sigma,
  // crossbar side
  output logic                 xbar_start,
  output tspin_t [N-1:0]       sigma_r,
  output tspin_t [N-1:0]       sigma_c,
  output logic [TEMP_W-1:0]    temp,
  input  logic                 xbar_done,
  input  logic signed [EW-1:0] einc,
  // observation of each decided iteration
  output logic                 obs_valid,
  output logic                 obs_accept,
  output logic                 obs_uphill,
  output logic                 obs_redraw,
  output logic                 obs_temp_dec,
  output logic [IDX_W-1:0]     obs_flip_idx [T],
  output logic [31:0]          iter_count,
  output logic [31:0]          accept_count
);

  typedef enum logic [2:0] {
    A_IDLE, A_INIT, A_SELECT, A_COMPUTE, A_WAIT, A_DECIDE, A_NEXT, A_DONE
  } astate_e;

  astate_e                  state;
  logic [$clog2(NW+1)-1:0]  word;
  logic [31:0]              rnd;
  logic                     fs_start, fs_done;
  logic [N-1:0]             flip_mask;
  logic [N-1:0]             sigma_new;
  logic                     sched_restart, sched_step, finished;
  logic signed [EW-1:0]     r_val;
  logic                     accept;

  rng u_rng (
    .clk, .rst_n, .seed_load(state == A_IDLE && start), .seed,
    .en(state != A_IDLE && state != A_DONE), .rnd
  );

  flip_selector #(.N(N), .T(T)) u_flip (
    .clk, .rst_n, .start(fs_start), .rnd, .n_active, .idx(obs_flip_idx),
    .mask(flip_mask), .done(fs_done), .redraw(obs_redraw)
  );

  temp_scheduler u_sched (
    .clk, .rst_n, .restart(sched_restart), .step(sched_step),
    .iters_per_step, .temp, .finished, .temp_dec(obs_temp_dec)
  );

  always_comb begin
    sigma_new = sigma ^ flip_mask;
    for (int i = 0; i < N; i++) begin
      sigma_r[i] = '{nz: !flip_mask[i], neg: !sigma_new[i]};
      sigma_c[i] = '{nz:  flip_mask[i], neg: !sigma_new[i]};
    end
    r_val         = EW'($unsigned(rnd[ADC_FRAC-1:0]));
    accept        = (einc <= 0) || (einc <= r_val);
    busy          = (state != A_IDLE) && (state != A_DONE);
    fs_start      = (state == A_SELECT);
    xbar_start    = (state == A_COMPUTE);
    sched_restart = (state == A_IDLE || state == A_DONE) && start;
    sched_step    = (state == A_DECIDE) && xbar_done;
    obs_valid     = (state == A_DECIDE) && xbar_done;
    obs_accept    = accept;
    obs_uphill    = accept && (einc > 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= A_IDLE;
      word         <= '0;
      sigma        <= '0;
      done         <= 1'b0;
      iter_count   <= '0;
      accept_count <= '0;
    end else begin
      unique case (state)
        A_IDLE, A_DONE: if (start) begin
          state        <= A_INIT;
          word         <= '0;
          done         <= 1'b0;
          iter_count   <= '0;
          accept_count <= '0;
        end
        A_INIT: begin
          // The generator was seeded on the start edge; take 32 spins per
          // cycle from its output.
          for (int b = 0; b < 32; b++)
            if (int'(word) * 32 + b < N) sigma[int'(word) * 32 + b] <= rnd[b];
          if (int'(word) == NW - 1) state <= A_SELECT;
          word <= word + 1'b1;
        end
        A_SELECT:  state <= A_WAIT;     // flip selector started
        A_WAIT:    if (fs_done) state <= A_COMPUTE;
        A_COMPUTE: state <= A_DECIDE; // crossbar started; wait in DECIDE
        A_DECIDE: begin
          if (xbar_done) begin
            iter_count <= iter_count + 32'd1;
            if (accept) begin
              sigma        <= sigma_new;
              accept_count <= accept_count + 32'd1;
            end
            state <= A_NEXT;
          end
        end
        A_NEXT: begin
          if (finished) begin
            state <= A_DONE;
            done  <= 1'b1;
          end else begin
            state <= A_SELECT;
          end
        end
        default: state <= A_IDLE;
      endcase
    end
  end

endmodule

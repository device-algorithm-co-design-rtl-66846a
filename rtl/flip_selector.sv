// flip_selector: chooses the T distinct spins that are flipped to form
// sigma_new in one annealing iteration, i.e. the flip vector sigma_f.
//
// After start it draws one candidate per cycle from 16 random bits,
// cand = (rnd[15:0] * n_active) >> 16, which is uniform over the spins
// 0..n_active-1 in use by the loaded problem (to within n_active/65536).
// n_active must lie in T..N and stay stable during a selection. A candidate equal to an index already chosen is dropped and
// redrawn next cycle. When T indices are chosen, done pulses for one cycle;
// idx and the N-bit mask then hold until the next start. Without repeats the
// selection takes T cycles after start. The paper fixes the number of flipped
// spins and picks them at random; the drawing, the redraw rule and the
// n_active limit are this design's choices.
module flip_selector
  import annealer_pkg::*;
#(
  parameter int N = N_SPINS,
  parameter int T = T_FLIP,
  localparam int IDX_W = $clog2(N),
  localparam int CNT_W = $clog2(T + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [31:0]      rnd,
  input  logic [IDX_W:0]   n_active,
  output logic [IDX_W-1:0] idx [T],
  output logic [N-1:0]     mask,
  output logic             done,
  output logic             redraw
);

  logic             active;
  logic [CNT_W-1:0] cnt;
  logic [IDX_W-1:0] cand;
  logic [31:0]      prod;

  always_comb begin
    prod   = rnd[15:0] * 32'(n_active);
    cand   = IDX_W'(prod >> 16);
    redraw = 1'b0;
    for (int t = 0; t < T; t++)
      if (t < int'(cnt) && idx[t] == cand) redraw = active;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cnt    <= '0;
      mask   <= '0;
      done   <= 1'b0;
      for (int t = 0; t < T; t++) idx[t] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        active <= 1'b1;
        cnt    <= '0;
        mask   <= '0;
      end else if (active && !redraw) begin
        for (int t = 0; t < T; t++)
          if (t == int'(cnt)) idx[t] <= cand;
        mask[cand] <= 1'b1;
        cnt        <= cnt + 1'b1;
        if (int'(cnt) == T - 1) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

endmodule

// tb_cim_annealer_full: one complete annealing run of the annealer at its
// default size, 3000 spins, on a Max-Cut-style Ising problem: a 60 x 50
// toroidal grid (6000 edges) with random +1/-1 couplings, one iteration per
// temperature step. Only the non-zero J entries are written. For every iteration it rebuilds E_inc from the specification (per
// sign phase and bit column: count the selected '1' cells, apply the ADC
// rounding, weight by bit, add with the phase sign) and checks the
// annealer's value; checks the acceptance rule and the update of sigma; and
// checks that the run ends after 70 iterations. It counts each mechanism
// of the design (downhill and uphill acceptance, rejection, flip redraw,
// temperature step, each sign phase carrying current, negative J entries,
// the end of annealing) and fails if one never occurred.
module tb_cim_annealer_full;
  import annealer_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 3000, K = 8, T = 2, IPS = 1;
  localparam int IW = $clog2(N);
  localparam int AW = $clog2(N + 1) + 4 + 1;
  localparam int EW = AW + K + 1 + 2 + $clog2(N + 1);
  logic clk = 0, rst_n = 0, prog_we = 0, start = 0;
  logic [IW-1:0] prog_row = 0, prog_col = 0;
  logic [K-1:0] prog_data = 0;
  logic [31:0] seed = 32'h0bad_cafe, iters_per_step = IPS;
  logic [IW:0] n_active = N;
  logic busy, done;
  logic [N-1:0] sigma, sig_before, exp_new;
  logic [9:0] temp;
  logic obs_valid, obs_accept, obs_uphill, obs_redraw, obs_temp_dec;
  logic signed [EW-1:0] obs_einc;
  logic [IW-1:0] obs_flip_idx [T];
  logic [31:0] iter_count, accept_count;
  byte jm [N][N];
  int checks = 0, failures = 0, iters = 0;
  int n_down = 0, n_up = 0, n_rej = 0, n_redraw = 0, n_tdec = 0, n_negj = 0;
  int n_phase [4];
  longint exp;
  bit was_accept;

  always #5 clk = ~clk;

  cim_annealer dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (iter %0d)", what, iters); end
  endtask

  function automatic int spin(logic [N-1:0] s, int i);
    return s[i] ? 1 : -1;
  endfunction

  // E_inc of flipping the spins in obs_flip_idx from s, at temperature t.
  function automatic longint ref_einc(logic [N-1:0] s, int t);
    bit   fl [N];
    int   sn [N];
    int   sr, sc, cnt;
    longint part, c, tot;
    real  icell;
    icell = ref_icell(ref_vbg((t + 5) / 10));
    for (int i = 0; i < N; i++) fl[i] = 0;
    for (int k = 0; k < T; k++) fl[obs_flip_idx[k]] = 1;
    for (int i = 0; i < N; i++) sn[i] = fl[i] ? -spin(s, i) : spin(s, i);
    tot = 0;
    for (int p = 0; p < 4; p++) begin
      sr = (p >= 2) ? -1 : 1;
      sc = (p == 1 || p == 3) ? -1 : 1;
      for (int j = 0; j < N; j++) begin
        if (!fl[j] || sn[j] != sc) continue;
        part = 0;
        for (int b = 0; b < K; b++) begin
          cnt = 0;
          for (int i = 0; i < N; i++)
            if (!fl[i] && sn[i] == sr && ((jm[i][j] >> b) & 1)) begin
              cnt++;
              if (jm[i][j] < 0 && b == K - 1) n_negj++;
            end
          c = ref_code(real'(cnt) * icell, AW);
          if (c != 0) n_phase[p]++;
          part += (b == K - 1) ? -(c <<< b) : (c <<< b);
        end
        tot += sr * sc * part;
      end
    end
    return tot;
  endfunction

  initial begin
    foreach (n_phase[p]) n_phase[p] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) jm[i][j] = 0;
    // torus: node (r, c) = r*50 + c, edges to (r, c+1) and (r+1, c)
    for (int r = 0; r < 60; r++)
      for (int c = 0; c < 50; c++) begin
        int a, b1, b2;
        a  = r * 50 + c;
        b1 = r * 50 + (c + 1) % 50;
        b2 = ((r + 1) % 60) * 50 + c;
        jm[a][b1] = $urandom_range(0, 1) ? 8'sd1 : -8'sd1;
        jm[b1][a] = jm[a][b1];
        jm[a][b2] = $urandom_range(0, 1) ? 8'sd1 : -8'sd1;
        jm[b2][a] = jm[a][b2];
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        if (jm[i][j] != 0) begin
          @(negedge clk);
          prog_we = 1; prog_row = IW'(i); prog_col = IW'(j); prog_data = jm[i][j];
        end
    @(negedge clk);
    prog_we = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done && iters < 100000) begin
      @(negedge clk);
      #1;
      if (obs_redraw) n_redraw++;
      if (obs_valid) begin
        exp = ref_einc(sigma, int'(temp));
        chk(longint'(obs_einc) == exp,
            $sformatf("E_inc %0d expected %0d at T=%0d", obs_einc, exp, temp));
        if (obs_einc <= 0) begin chk(obs_accept, "downhill accepted"); n_down++; end
        else if (obs_einc >= 16) begin chk(!obs_accept, "E_inc >= 1 rejected"); n_rej++; end
        else if (obs_accept) n_up++;
        else n_rej++;
        if (obs_temp_dec) n_tdec++;
        was_accept = obs_accept;
        sig_before = sigma;
        exp_new = sigma;
        for (int k = 0; k < T; k++) exp_new[obs_flip_idx[k]] = ~exp_new[obs_flip_idx[k]];
        iters++;
        @(posedge clk);
        #1;
        chk(sigma == (was_accept ? exp_new : sig_before), "sigma update");
      end
    end
    repeat (3) @(posedge clk);
    chk(done && !busy, "annealing ended");
    chk(iters == 70 * IPS && iter_count == 32'(iters), $sformatf("iterations %0d", iters));
    chk(temp == 0, "final temperature 0");
    $display("mechanisms: downhill %0d uphill %0d reject %0d redraw %0d temp-steps %0d",
             n_down, n_up, n_rej, n_redraw, n_tdec);
    $display("phases with current: ++ %0d +- %0d -+ %0d -- %0d, negative-J bit hits %0d",
             n_phase[0], n_phase[1], n_phase[2], n_phase[3], n_negj);
    chk(n_down > 0, "downhill acceptance happened");
    chk(n_up > 0, "uphill acceptance happened");
    chk(n_rej > 0, "rejection happened");
    // a repeated flip candidate is too rare at 3000 spins to require here
    chk(n_tdec == 70, "70 temperature steps");
    for (int p = 0; p < 4; p++) chk(n_phase[p] > 0, $sformatf("phase %0d carried current", p));
    chk(n_negj > 0, "negative J entries used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

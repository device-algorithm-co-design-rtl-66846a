// tb_annealing_logic: the testbench plays the crossbar, answering each start
// with a random E_inc after a random delay. It checks the random initial
// spins (xorshift32 words of the seed), that sigma_r / sigma_c are sigma_new
// split at exactly T distinct flipped spins, the acceptance rule (E_inc <= 0
// always accepted, E_inc >= 1.0 never, 0 < E_inc < 1.0 sometimes), the
// update of sigma, the temperature at each iteration and the end after
// 70 * iters_per_step iterations.
module tb_annealing_logic;
  import annealer_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 40, K = 8, T = 2, IPS = 2;
  localparam int EW = $clog2(N + 1) + 4 + 1 + K + 1 + 2 + $clog2(N + 1);
  logic clk = 0, rst_n = 0, start = 0, xbar_done = 0;
  logic [31:0] seed = 32'h1234_5678, iters_per_step = IPS;
  logic [6:0] n_active = N;
  logic busy, done, xbar_start;
  logic [N-1:0] sigma, sig_before, exp_new;
  tspin_t [N-1:0] sigma_r, sigma_c;
  logic [9:0] temp;
  logic signed [EW-1:0] einc = 0;
  logic obs_valid, obs_accept, obs_uphill, obs_redraw, obs_temp_dec;
  logic [5:0] obs_flip_idx [T];
  logic [31:0] iter_count, accept_count;
  logic [31:0] x;
  int checks = 0, failures = 0;
  int iters = 0, accepts = 0, n_up_acc = 0, n_up_rej = 0, n_down = 0, nflip;
  bit was_accept;
  always #5 clk = ~clk;

  annealing_logic #(.N(N), .K(K), .T(T)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (iter %0d)", what, iters); end
  endtask

  // crossbar stand-in
  initial begin
    forever begin
      @(posedge clk);
      if (xbar_start) begin
        repeat ($urandom_range(2, 10)) @(negedge clk);
        case ($urandom_range(0, 2))
          0: einc = EW'(-$signed($urandom_range(0, 60)));
          1: einc = EW'($urandom_range(1, 15));
          default: einc = EW'($urandom_range(16, 80));
        endcase
        xbar_done = 1;
        @(negedge clk);
        xbar_done = 0;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done && iters < 1000) begin
      @(negedge clk);
      #1;
      if (xbar_start) begin
        if (iters == 0) begin
          x = seed;
          for (int w = 0; w * 32 < N; w++) begin
            for (int b = 0; b < 32 && w * 32 + b < N; b++)
              chk(sigma[w * 32 + b] == x[b], $sformatf("initial spin %h %h", sigma, x));
            x = ref_xorshift(x);
          end
        end
        chk(int'(temp) == 700 - 10 * (iters / IPS), $sformatf("temperature %0d", temp));
        chk(obs_flip_idx[0] != obs_flip_idx[1], "distinct flips");
        exp_new = sigma;
        for (int t = 0; t < T; t++) exp_new[obs_flip_idx[t]] = ~exp_new[obs_flip_idx[t]];
        nflip = 0;
        for (int i = 0; i < N; i++) begin
          if (sigma_c[i].nz) nflip++;
          chk(sigma_r[i].nz == !sigma_c[i].nz, "r/c disjoint");
          chk(sigma_r[i].neg == !exp_new[i] && sigma_c[i].neg == !exp_new[i], "sign of sigma_new");
          chk(sigma_c[i].nz == (i == obs_flip_idx[0] || i == obs_flip_idx[1]), "flip set");
        end
        chk(nflip == T, "flip count");
        sig_before = sigma;
      end
      if (obs_valid) begin
        was_accept = obs_accept;
        if (einc <= 0) begin chk(obs_accept, "downhill accepted"); n_down++; end
        else if (einc >= 16) chk(!obs_accept, "E_inc >= 1 rejected");
        else if (obs_accept) n_up_acc++;
        else n_up_rej++;
        iters++;
        if (obs_accept) accepts++;
        @(posedge clk);
        #1;
        chk(sigma == (was_accept ? exp_new : sig_before), "sigma update");
      end
    end
    repeat (3) @(posedge clk);
    chk(done && !busy, "done");
    chk(iters == 70 * IPS, $sformatf("iteration count %0d", iters));
    chk(iter_count == 32'(iters) && accept_count == 32'(accepts), "counters");
    chk(n_up_acc > 0 && n_up_rej > 0 && n_down > 0, "all acceptance paths");
    $display("downhill %0d uphill-accepted %0d uphill-rejected %0d", n_down, n_up_acc, n_up_rej);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

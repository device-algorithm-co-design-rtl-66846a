// tb_cim_crossbar: E_inc of the whole crossbar against a reference. A random
// 16x16 J (8-bit two's complement, full range) is written; then, for random
// flip sets, spin values and temperatures, einc must equal the value
// rebuilt from the specification: per phase and flipped column, count the
// selected '1' cells of each bit column, convert with the ADC rounding, weight
// by bit (sign bit negative), and add with the phase sign. It must also lie
// within the ADC rounding of the ideal sigma_r^T J sigma_c * f(T), and done
// must come 74 cycles after start. The ADC starts of all groups are counted:
// only the groups of flipped spins may convert, each in the two phases that
// match its sign, so a computation must take exactly 2*K*|F| conversions.
module tb_cim_crossbar;
  import annealer_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 16, K = 8;
  localparam int AW = $clog2(N + 1) + 4 + 1;
  localparam int EW = AW + K + 1 + 2 + $clog2(N + 1);
  logic clk = 0, rst_n = 0, prog_we = 0, start = 0;
  logic [3:0] prog_row = 0, prog_col = 0;
  logic [K-1:0] prog_data = 0;
  tspin_t [N-1:0] sigma_r, sigma_c;
  logic [9:0] temp = 0;
  logic busy, done;
  logic signed [EW-1:0] einc;
  int checks = 0, failures = 0;
  int jm [N][N];
  int snew [N];
  bit flip [N];
  int cyc, code_t, cnt, sr, sc, sgn;
  longint exp, part, c;
  real icell, ideal, err, tol;
  int conv_g [N];
  int conv, nflip;
  always #5 clk = ~clk;

  for (genvar g = 0; g < N; g++) begin : g_mon
    always @(posedge clk) if (dut.g_grp[g].u_grp.u_adc.start) conv_g[g]++;
  end

  cim_crossbar #(.N(N), .K(K)) dut (.*);

  initial begin
    sigma_r = '0; sigma_c = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int j = i; j < N; j++) begin
        jm[i][j] = $urandom_range(0, 255) - 128;
        jm[j][i] = jm[i][j];
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        prog_we = 1; prog_row = 4'(i); prog_col = 4'(j); prog_data = K'(jm[i][j]);
      end
    @(negedge clk);
    prog_we = 0;
    for (int n = 0; n < 60; n++) begin
      for (int i = 0; i < N; i++) begin
        snew[i] = $urandom_range(0, 1) ? 1 : -1;
        flip[i] = ($urandom_range(0, 5) == 0);
        sigma_r[i] = '{nz: !flip[i], neg: snew[i] < 0};
        sigma_c[i] = '{nz:  flip[i], neg: snew[i] < 0};
      end
      temp = 10'(10 * $urandom_range(0, 70));
      if (n == 0) temp = 700;
      for (int g = 0; g < N; g++) conv_g[g] = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 500) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 74) begin failures++; $display("FAIL latency %0d", cyc); end
      conv = 0; nflip = 0;
      for (int g = 0; g < N; g++) begin
        conv += conv_g[g];
        if (flip[g]) nflip++;
      end
      checks++;
      if (conv != 2 * K * nflip) begin
        failures++;
        $display("FAIL conversions %0d, expected %0d", conv, 2 * K * nflip);
      end
      // reference
      code_t = (int'(temp) + 5) / 10;
      icell  = ref_icell(ref_vbg(code_t));
      exp = 0; ideal = 0.0; tol = 0.0;
      for (int p = 0; p < 4; p++) begin
        sr  = (p >= 2) ? -1 : 1;
        sc  = (p == 1 || p == 3) ? -1 : 1;
        sgn = sr * sc;
        for (int j = 0; j < N; j++) begin
          if (!flip[j] || snew[j] != sc) continue;
          part = 0;
          for (int b = 0; b < K; b++) begin
            cnt = 0;
            for (int i = 0; i < N; i++)
              if (!flip[i] && snew[i] == sr && ((jm[i][j] >> b) & 1)) cnt++;
            c = ref_code(real'(cnt) * icell, AW);
            part += (b == K - 1) ? -(c <<< b) : (c <<< b);
            tol += 0.5 * real'(1 << b);
          end
          exp += sgn * part;
        end
      end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          if (!flip[i] && flip[j]) ideal += real'(snew[i] * jm[i][j] * snew[j]);
      ideal = ideal * (icell / 9.0) * 16.0;
      checks++;
      if (longint'(einc) != exp) begin
        failures++;
        $display("FAIL n=%0d T=%0d einc=%0d exp=%0d", n, temp, einc, exp);
      end
      err = real'(einc) - ideal;
      checks++;
      if (err > tol + 1e-6 || err < -tol - 1e-6) begin
        failures++;
        $display("FAIL ideal n=%0d einc=%0d ideal=%f tol=%f", n, einc, ideal, tol);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

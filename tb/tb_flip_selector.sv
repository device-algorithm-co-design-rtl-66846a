// tb_flip_selector: with random words fed in, the selector must choose the
// first T distinct candidates (rnd[15:0] * n_active) >> 16 in order, for
// n_active = N and for random smaller problem sizes, skip repeats
// one cycle each, build the matching mask and pulse done once.
module tb_flip_selector;
  localparam int N = 5, T = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] rnd = 0;
  logic [3:0] n_active = N;
  logic [2:0] idx [T];
  logic [N-1:0] mask;
  logic done, redraw;
  int checks = 0, failures = 0, n_redraw_total = 0;
  int chosen [$];
  int cand, cyc, exp_redraws;
  logic [N-1:0] exp_mask;
  always #5 clk = ~clk;

  flip_selector #(.N(N), .T(T)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 200; run++) begin
      @(negedge clk);
      n_active = (run % 2 == 0) ? 4'(N) : 4'($urandom_range(T, N));
      start = 1;
      @(negedge clk);
      start = 0;
      chosen.delete();
      exp_redraws = 0;
      cyc = 0;
      while (chosen.size() < T && cyc < 100) begin
        rnd = $urandom();
        cand = int'((rnd[15:0] * n_active) >> 16);
        #1;
        if (cand inside {chosen}) begin
          exp_redraws++;
          checks++;
          if (!redraw) failures++;
        end else begin
          chosen.push_back(cand);
          checks++;
          if (redraw) failures++;
        end
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (!done) begin failures++; $display("FAIL no done"); end
      checks++;
      if (cyc != T + exp_redraws) failures++;
      n_redraw_total += exp_redraws;
      exp_mask = '0;
      for (int t = 0; t < T; t++) begin
        exp_mask[chosen[t]] = 1'b1;
        checks++;
        if (int'(idx[t]) != chosen[t]) begin
          failures++;
          $display("FAIL idx[%0d]=%0d exp %0d", t, idx[t], chosen[t]);
        end
      end
      checks++;
      if (mask !== exp_mask) begin failures++; $display("FAIL mask %b exp %b", mask, exp_mask); end
      @(negedge clk);
      checks++;
      if (done) failures++;
    end
    checks++;
    if (n_redraw_total == 0) failures++;   // the redraw path must be exercised
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

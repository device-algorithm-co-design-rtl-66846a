// tb_temp_scheduler: T must start at 700, fall by 10 after every
// iters_per_step steps, and end (finished) on reaching 0 after exactly
// 70 * iters_per_step steps; 0 iterations per step counts as 1.
module tb_temp_scheduler;
  logic clk = 0, rst_n = 0, restart = 0, step = 0;
  logic [31:0] iters_per_step = 3;
  logic [9:0] temp;
  logic finished, temp_dec;
  int checks = 0, failures = 0, steps, exp_t, n_dec;
  always #5 clk = ~clk;

  temp_scheduler dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int ips = 0; ips < 5; ips++) begin
      iters_per_step = 32'(ips);
      @(negedge clk); restart = 1;
      @(negedge clk); restart = 0;
      checks++;
      if (temp != 700 || finished) failures++;
      steps = 0; n_dec = 0;
      while (!finished && steps < 1000) begin
        step = ($urandom_range(0, 2) != 0);
        #1;
        if (temp_dec) n_dec++;
        @(negedge clk);
        if (step) steps++;
        step = 0;
        exp_t = 700 - 10 * (steps / (ips == 0 ? 1 : ips));
        if (exp_t < 0) exp_t = 0;
        checks++;
        if (int'(temp) != exp_t) begin
          failures++;
          $display("FAIL ips=%0d steps=%0d T=%0d exp %0d", ips, steps, temp, exp_t);
        end
      end
      checks++;
      if (steps != 70 * (ips == 0 ? 1 : ips) || temp != 0 || n_dec != 70) begin
        failures++;
        $display("FAIL end ips=%0d steps=%0d dec=%0d", ips, steps, n_dec);
      end
      // further steps change nothing
      step = 1; @(negedge clk); step = 0;
      checks++;
      if (temp != 0 || !finished) failures++;
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

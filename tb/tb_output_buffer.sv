// tb_output_buffer: the buffer must load the sum of all group results on
// load, flag it one cycle later and hold it otherwise.
module tb_output_buffer;
  localparam int NG = 16, K = 8;
  localparam int GW = $clog2(NG + 1) + 4 + 1 + K + 1 + 2;
  localparam int EW = GW + $clog2(NG + 1);
  logic clk = 0, rst_n = 0, load = 0;
  logic signed [GW-1:0] group_sums [NG];
  logic signed [EW-1:0] einc;
  logic valid;
  longint exp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  output_buffer #(.N_GROUPS(NG), .K(K)) dut (.*);

  initial begin
    foreach (group_sums[g]) group_sums[g] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      exp = 0;
      foreach (group_sums[g]) begin
        group_sums[g] = GW'($signed($urandom_range(0, 1 << 22)) - (1 << 21));
        if (n % 3 == 0 && g > 1) group_sums[g] = '0;   // sparse activity
        exp += longint'(group_sums[g]);
      end
      load = 1;
      @(negedge clk);
      load = 0;
      checks++;
      if (!valid || longint'(einc) != exp) begin
        failures++;
        $display("FAIL einc=%0d exp=%0d valid=%0b", einc, exp, valid);
      end
      foreach (group_sums[g]) group_sums[g] = GW'(g);
      @(negedge clk);
      checks++;
      if (valid || longint'(einc) != exp) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

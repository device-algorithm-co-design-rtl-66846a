// tb_group_sum: the Sum must add the partials of positive phases, subtract
// those of negative phases and clear on request.
module tb_group_sum;
  localparam int NR = 3000, K = 8;
  localparam int SW = $clog2(NR + 1) + 4 + 1 + K + 1;
  localparam int GW = SW + 2;
  logic clk = 0, rst_n = 0, clear = 0, add = 0, negate = 0;
  logic signed [SW-1:0] partial = 0;
  logic signed [GW-1:0] sum;
  longint exp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  group_sum #(.N_ROWS(NR), .K(K)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      exp = 0;
      for (int p = 0; p < 4; p++) begin
        partial = SW'($signed($urandom_range(0, 1 << 20)) - (1 << 19));
        negate  = (p == 1 || p == 2);
        add     = ($urandom_range(0, 4) != 0);
        if (add) exp += negate ? -longint'(partial) : longint'(partial);
        @(negedge clk);
        add = 0;
        @(negedge clk);
      end
      checks++;
      if (longint'(sum) != exp) begin
        failures++;
        $display("FAIL sum=%0d exp=%0d", sum, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_shift_add: the S&A must add code * 2^b for b < K-1 and subtract
// code * 2^(K-1) for the sign column, and clear on request.
module tb_shift_add;
  localparam int NR = 3000, K = 8;
  localparam int AW = $clog2(NR + 1) + 4 + 1;
  localparam int SW = AW + K + 1;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [2:0] bit_idx = 0;
  logic [AW-1:0] code = 0;
  logic signed [SW-1:0] acc;
  longint exp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  shift_add #(.N_ROWS(NR), .K(K)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      exp = 0;
      for (int b = 0; b < K; b++) begin
        code    = AW'($urandom_range(0, (1 << AW) - 1));
        bit_idx = 3'(b);
        en      = ($urandom_range(0, 3) != 0);
        if (en) exp += (b == K - 1) ? -(longint'(code) << b) : (longint'(code) << b);
        @(negedge clk);
      end
      en = 0;
      checks++;
      if (longint'(acc) != exp) begin
        failures++;
        $display("FAIL acc=%0d exp=%0d", acc, exp);
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

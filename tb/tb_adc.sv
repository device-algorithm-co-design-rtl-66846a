// tb_adc: codes must equal round(I / (9 uA / 16)), saturated at the code
// width, and valid must follow start by exactly one cycle.
module tb_adc;
  import tb_ref_pkg::*;
  localparam int NR = 100;                       // small array: 12-bit code
  localparam int W  = $clog2(NR + 1) + 4 + 1;
  logic clk = 0, rst_n = 0, start = 0;
  real i_in = 0.0;
  logic [W-1:0] code;
  logic valid;
  longint exp;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  adc #(.N_ROWS(NR)) dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      // up to 1.3x full scale so that saturation is exercised
      i_in  = real'($urandom_range(0, 1_000_000)) * 1.3e-6 * (real'((1 << W) - 1) * 9.0 / 16.0);
      if (n % 50 == 0) i_in = real'(n / 50) * 9.0 / 16.0;   // exact steps
      start = 1;
      exp   = ref_code(i_in, W);
      @(negedge clk);
      start = 0;
      checks++;
      if (!valid || longint'(code) != exp) begin
        failures++;
        $display("FAIL i=%f code=%0d exp=%0d valid=%0b", i_in, code, exp, valid);
      end
      @(negedge clk);
      checks++;
      if (valid) failures++;
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

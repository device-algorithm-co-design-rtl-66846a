// tb_bg_encoder: every temperature 0..1023 must give the back-gate code
// round(T/10) limited to 70, latched only on load.
module tb_bg_encoder;
  logic clk = 0, rst_n = 0, load = 0;
  logic [9:0] temp = 0;
  logic [6:0] vbg_code;
  int checks = 0, failures = 0, exp;
  always #5 clk = ~clk;

  bg_encoder dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    checks++; if (vbg_code !== 0) failures++;
    rst_n = 1;
    for (int t = 0; t < 1024; t++) begin
      @(negedge clk); temp = 10'(t); load = 1;
      @(negedge clk); load = 0;
      exp = (t + 5) / 10;
      if (exp > 70) exp = 70;
      checks++;
      if (int'(vbg_code) != exp) begin
        failures++;
        $display("FAIL T=%0d code=%0d exp=%0d", t, vbg_code, exp);
      end
      // without load the code must hold
      temp = 10'(t ^ 10'h2a5);
      @(negedge clk);
      checks++;
      if (int'(vbg_code) != exp) failures++;
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

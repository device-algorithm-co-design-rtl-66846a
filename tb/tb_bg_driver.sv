// tb_bg_driver: the BG DAC must give 10 mV per code, limited to 0.7 V.
module tb_bg_driver;
  logic [6:0] vbg_code;
  real vbg_v, exp;
  int checks = 0, failures = 0;

  bg_driver dut (.*);

  initial begin
    for (int c = 0; c < 128; c++) begin
      vbg_code = 7'(c);
      #1;
      exp = (c > 70 ? 70 : c) / 100.0;
      checks++;
      if (vbg_v < exp - 1e-9 || vbg_v > exp + 1e-9) begin
        failures++;
        $display("FAIL code=%0d v=%f exp=%f", c, vbg_v, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

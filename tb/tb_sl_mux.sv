// tb_sl_mux: the MUX must pass the selected source-line current and give 0
// when disabled.
module tb_sl_mux;
  logic en;
  logic [2:0] sel;
  real i_in [8];
  real i_out;
  int checks = 0, failures = 0;

  sl_mux #(.K(8)) dut (.*);

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int b = 0; b < 8; b++) i_in[b] = real'($urandom_range(0, 100000)) / 7.0;
      sel = 3'($urandom_range(0, 7));
      en  = 1'b1;
      #1;
      checks++;
      if (i_out != i_in[sel]) begin
        failures++;
        $display("FAIL sel=%0d out=%f exp=%f", sel, i_out, i_in[sel]);
      end
      en = 1'b0;
      #1;
      checks++;
      if (i_out != 0.0) failures++;
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

// tb_crossbar_ctrl: one computation must step 4 phases in the order
// PP, PN, NP, NN; convert K columns per phase (SENSE then accumulate of the
// same column); add each phase once with the right sign; load the buffer
// once; and finish 4*(2K+2)+3 cycles after start.
module tb_crossbar_ctrl;
  import annealer_pkg::*;
  localparam int K = 8;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, bg_load, drive_en, mux_en, adc_start, sa_clear, sa_en;
  logic sum_clear, sum_add, sum_negate, buf_load;
  logic [2:0] mux_sel, sa_bit;
  phase_e phase;
  int checks = 0, failures = 0;
  int cyc, n_adc, n_sa, n_add, n_load, n_bg, last_sel;
  int phase_seen [4];
  always #5 clk = ~clk;

  crossbar_ctrl #(.K(K)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      @(negedge clk);
      chk(!busy, "idle before start");
      start = 1;
      cyc = 0; n_adc = 0; n_sa = 0; n_add = 0; n_load = 0; n_bg = 0; last_sel = -1;
      foreach (phase_seen[p]) phase_seen[p] = 0;
      #1;
      chk(bg_load && sum_clear, "bg_load and sum_clear with start");
      @(negedge clk);
      start = 0;
      while (!done && cyc < 200) begin
        cyc++;
        if (adc_start) begin
          chk(mux_en && drive_en, "adc with mux and drive");
          chk(int'(mux_sel) == (n_adc % K), "mux order");
          last_sel = mux_sel;
          n_adc++;
        end
        if (sa_en) begin
          chk(int'(sa_bit) == last_sel, "sa bit follows mux");
          n_sa++;
        end
        if (sum_add) begin
          chk(int'(phase) == n_add, "phase order");
          chk(sum_negate == (phase == PH_PN || phase == PH_NP), "phase sign");
          chk(sa_clear, "sa clear at phase end");
          chk(n_adc == (n_add + 1) * K, "K conversions per phase");
          n_add++;
        end
        if (buf_load) n_load++;
        @(negedge clk);
      end
      chk(done, "done reached");
      chk(cyc + 1 == 4 * (2 * K + 2) + 2, $sformatf("latency %0d", cyc + 1));
      chk(n_adc == 4 * K && n_sa == 4 * K, "conversion count");
      chk(n_add == 4 && n_load == 1, "phase and load count");
      @(negedge clk);
      chk(!busy && !done, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

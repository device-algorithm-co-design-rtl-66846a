// tb_dgfefet_array: after random J entries are written, every source-line
// current must equal (number of rows with FG high and a stored '1' in that
// column) * cell current at the BG voltage, and zero when its DL is low.
module tb_dgfefet_array;
  import tb_ref_pkg::*;
  localparam int NR = 12, K = 4, NC = NR * K;
  logic clk = 0, prog_we = 0;
  logic [3:0] prog_row = 0, prog_col = 0;
  logic [K-1:0] prog_data = 0;
  logic [NR-1:0] fg;
  logic [NC-1:0] dl;
  real vbg_v;
  real i_sl [NC];
  logic [K-1:0] jref [NR][NR];
  int checks = 0, failures = 0, cnt;
  real exp;
  always #5 clk = ~clk;

  dgfefet_array #(.N_ROWS(NR), .K(K)) dut (.*);

  initial begin
    fg = '0; dl = '0; vbg_v = 0.7;
    #1;
    // erased array: no current anywhere
    fg = '1; dl = '1;
    #1;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (i_sl[c] != 0.0) failures++;
    end
    fg = '0; dl = '0;
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NR; c++) begin
        jref[r][c] = K'($urandom_range(0, (1 << K) - 1));
        @(negedge clk);
        prog_we = 1; prog_row = 4'(r); prog_col = 4'(c); prog_data = jref[r][c];
      end
    @(negedge clk);
    prog_we = 0;
    for (int n = 0; n < 100; n++) begin
      fg    = NR'($urandom());
      dl    = {$urandom(), $urandom()};
      vbg_v = ref_vbg($urandom_range(0, 70));
      #1;
      for (int c = 0; c < NC; c++) begin
        cnt = 0;
        for (int r = 0; r < NR; r++)
          if (fg[r] && jref[r][c / K][c % K]) cnt++;
        exp = dl[c] ? real'(cnt) * ref_icell(vbg_v) : 0.0;
        checks++;
        if (i_sl[c] > exp + 1e-9 || i_sl[c] < exp - 1e-9) begin
          failures++;
          $display("FAIL col %0d: %f exp %f", c, i_sl[c], exp);
        end
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

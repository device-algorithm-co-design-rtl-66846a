// tb_rng: checks the xorshift32 sequence against a reference, the hold when
// en is low, and the replacement of a zero seed.
module tb_rng;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, seed_load = 0, en = 0;
  logic [31:0] seed = 0, rnd, ref_x;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rng dut (.*);

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); seed = 32'hdeadbeef; seed_load = 1;
    @(negedge clk); seed_load = 0;
    check(rnd, 32'hdeadbeef, "seed");
    ref_x = 32'hdeadbeef;
    en = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      ref_x = ref_xorshift(ref_x);
      check(rnd, ref_x, "step");
    end
    en = 0;
    repeat (3) @(negedge clk);
    check(rnd, ref_x, "hold");
    seed = 0; seed_load = 1;
    @(negedge clk); seed_load = 0;
    check(rnd, 32'd1, "zero seed");
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

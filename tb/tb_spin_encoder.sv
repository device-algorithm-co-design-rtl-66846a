// tb_spin_encoder: for random ternary sigma_r / sigma_c and every phase, the
// FG and DL levels must select exactly the elements of the phase's signs.
module tb_spin_encoder;
  import annealer_pkg::*;
  localparam int N = 16, K = 4;
  logic en;
  phase_e phase;
  tspin_t [N-1:0] sigma_r, sigma_c;
  logic [N-1:0] fg;
  logic [N*K-1:0] dl;
  int checks = 0, failures = 0;
  int vr [N], vc [N];   // reference values in {-1, 0, +1}
  int sr, sc;
  logic e;

  spin_encoder #(.N(N), .K(K)) dut (.*);

  initial begin
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < N; i++) begin
        vr[i] = $urandom_range(0, 2) - 1;
        vc[i] = $urandom_range(0, 2) - 1;
        sigma_r[i] = '{nz: vr[i] != 0, neg: vr[i] < 0};
        sigma_c[i] = '{nz: vc[i] != 0, neg: vc[i] < 0};
      end
      for (int p = 0; p < 5; p++) begin
        en    = (p < 4);
        phase = phase_e'(p % 4);
        sr = (p == 2 || p == 3) ? -1 : 1;
        sc = (p == 1 || p == 3) ? -1 : 1;
        #1;
        for (int i = 0; i < N; i++) begin
          e = en && (vr[i] == sr);
          checks++;
          if (fg[i] !== e) begin
            failures++;
            $display("FAIL fg[%0d] phase %0d", i, p);
          end
          for (int b = 0; b < K; b++) begin
            e = en && (vc[i] == sc);
            checks++;
            if (dl[i*K + b] !== e) failures++;
          end
        end
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

// crossbar_ctrl: controller of one E_inc computation on the crossbar. It plays
// the roles of the FG, DL, BG, SL, output and global control blocks around
// the array.
//
// On start (accepted only when idle) it latches the temperature into the BG
// encoder (bg_load) and clears the group sums. It then runs the four sign
// phases PH_PP, PH_PN, PH_NP, PH_NN. In each phase the encoders drive the
// array (drive_en) for one settling cycle, then the K source lines of every
// group are converted one after another: a SENSE cycle selects column b in
// every MUX and starts every ADC, the next cycle adds the code into the S&A
// with bit weight b. A phase ends with one cycle that moves the S&A result
// into the group Sum (subtracted for the mixed-sign phases) and clears the
// S&A. Finally the output buffer loads the total and done pulses one cycle
// later, when the buffer holds E_inc.
// Latency: done is high 4*(2*K+2) + 2 cycles after the start cycle (74 for
// K = 8).
// The paper gives the sequential sensing of the K columns of a group and the
// parallel operation of all groups; the cycle-level schedule is this
// design's choice.
module crossbar_ctrl
  import annealer_pkg::*;
#(
  parameter int K = K_BITS,
  localparam int BIT_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic             bg_load,
  output logic             drive_en,
  output phase_e           phase,
  output logic             mux_en,
  output logic [BIT_W-1:0] mux_sel,
  output logic             adc_start,
  output logic             sa_clear,
  output logic             sa_en,
  output logic [BIT_W-1:0] sa_bit,
  output logic             sum_clear,
  output logic             sum_add,
  output logic             sum_negate,
  output logic             buf_load
);

  typedef enum logic [2:0] {
    S_IDLE, S_DRIVE, S_SENSE, S_WAIT, S_PHASE_END, S_AGG, S_FIN
  } state_e;

  state_e           state;
  logic [BIT_W-1:0] bit_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      phase <= PH_PP;
      bit_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_DRIVE;
          phase <= PH_PP;
        end
        S_DRIVE: begin
          bit_q <= '0;
          state <= S_SENSE;
        end
        S_SENSE: state <= S_WAIT;
        S_WAIT: begin
          if (int'(bit_q) == K - 1) state <= S_PHASE_END;
          else begin
            bit_q <= bit_q + 1'b1;
            state <= S_SENSE;
          end
        end
        S_PHASE_END: begin
          if (phase == PH_NN) state <= S_AGG;
          else begin
            phase <= phase_e'(phase + 2'd1);
            state <= S_DRIVE;
          end
        end
        S_AGG: state <= S_FIN;
        S_FIN: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state != S_IDLE);
    done       = (state == S_FIN);
    bg_load    = (state == S_IDLE) && start;
    sum_clear  = (state == S_IDLE) && start;
    drive_en   = (state == S_DRIVE) || (state == S_SENSE) || (state == S_WAIT);
    mux_en     = (state == S_SENSE);
    mux_sel    = bit_q;
    adc_start  = (state == S_SENSE);
    sa_en      = (state == S_WAIT);
    sa_bit     = bit_q;
    sa_clear   = (state == S_PHASE_END) || ((state == S_IDLE) && start);
    sum_add    = (state == S_PHASE_END);
    sum_negate = (phase == PH_PN) || (phase == PH_NP);
    buf_load   = (state == S_AGG);
  end

endmodule

// temp_scheduler: the annealing schedule ("update T"). It holds the current
// temperature T and lowers it by one back-gate step after a preset number of
// iterations.
//
// restart sets T to T_START (700, i.e. V_BG = 0.7 V) and clears the iteration
// count. Each step pulse (one finished iteration) counts; after
// iters_per_step of them (0 counts as 1) T falls by T_STEP (10, one 10 mV
// back-gate step). When T reaches 0 (V_BG = 0 V) it stays there and finished
// is raised: the annealing ends without running iterations at 0 V. T moves
// on the clock edge of the step that completes the count. The stepwise
// decrease, the preset iteration count and the stop at 0 V follow the paper;
// the start value T = 700 comes from this design's T = 1000 * V_BG scale.
module temp_scheduler
  import annealer_pkg::*;
#(
  parameter int T_START = T_MAX,
  parameter int STEP    = T_STEP
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              restart,
  input  logic              step,
  input  logic [31:0]       iters_per_step,
  output logic [TEMP_W-1:0] temp,
  output logic              finished,
  output logic              temp_dec
);

  logic [31:0] cnt;
  logic [31:0] limit;

  always_comb begin
    limit    = (iters_per_step == 32'd0) ? 32'd1 : iters_per_step;
    temp_dec = step && !finished && (cnt + 32'd1 >= limit);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      temp     <= '0;
      cnt      <= '0;
      finished <= 1'b1;
    end else if (restart) begin
      temp     <= TEMP_W'(T_START);
      cnt      <= '0;
      finished <= (T_START == 0);
    end else if (step && !finished) begin
      if (temp_dec) begin
        cnt <= '0;
        if (int'(temp) <= STEP) begin
          temp     <= '0;
          finished <= 1'b1;
        end else begin
          temp <= temp - TEMP_W'(STEP);
        end
      end else begin
        cnt <= cnt + 32'd1;
      end
    end
  end

endmodule

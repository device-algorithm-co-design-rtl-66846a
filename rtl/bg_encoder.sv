// bg_encoder: temperature (BG) encoder. It converts the annealing temperature
// T into the code of the back-gate voltage that makes the cell current follow
// the fractional annealing factor f(T).
//
// The temperature range is normalized onto the 0.7 V .. 0 V back-gate range
// in 10 mV steps, T = 1000 * V_BG: code = round(T / 10), clamped to 70. The
// code is registered when load is high and holds otherwise (it stays valid
// for a whole E_inc computation); reset gives 0 (0 V). The voltage range and
// step follow the paper; the T = 1000*V_BG scale and the register are this
// design's choices.
module bg_encoder
  import annealer_pkg::*;
#(
  parameter int MAX_CODE = VBG_MAX_CODE,
  parameter int STEP     = T_STEP
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [TEMP_W-1:0] temp,
  output logic [VBG_W-1:0]  vbg_code
);

  logic [TEMP_W:0] quot;

  always_comb begin
    quot = ({1'b0, temp} + (TEMP_W+1)'(STEP / 2)) / (TEMP_W+1)'(STEP);
    if (int'(quot) > MAX_CODE) quot = (TEMP_W+1)'(MAX_CODE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    vbg_code <= '0;
    else if (load) vbg_code <= VBG_W'(quot);
  end

endmodule

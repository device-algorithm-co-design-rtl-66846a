// bg_driver: behavioural model (not synthesizable logic) of the back-gate
// driver, an ideal DAC that turns the BG code into the analog voltage applied
// to every BG line of the array.
//
// V_BG = vbg_code * 10 mV, so codes 70..0 span the 0.7 V .. 0 V range the
// paper uses, in its 0.01 V steps; codes above 70 are clamped to 0.7 V. The
// output follows the input without delay. The range and step follow the
// paper; an ideal, instantaneous DAC is this model's choice.
module bg_driver
  import annealer_pkg::*;
#(
  parameter int MAX_CODE = VBG_MAX_CODE
) (
  input  logic [VBG_W-1:0] vbg_code,
  output real              vbg_v
);

  always_comb begin
    if (int'(vbg_code) > MAX_CODE) vbg_v = real'(MAX_CODE) * VBG_LSB_V;
    else                           vbg_v = real'(vbg_code) * VBG_LSB_V;
  end

endmodule

// tb_ref_pkg: reference arithmetic for the testbenches, written from the
// specification rather than from the RTL: the device factor f(T), the cell
// current, the ADC rounding and a xorshift32 step.
package tb_ref_pkg;

  localparam real REF_I_ON_UA = 9.0;
  localparam int  REF_FRAC    = 4;

  // f(T) = 1/(-0.006 T + 5) - 0.2, never negative.
  function automatic real ref_f(real t);
    real f;
    f = 1.0 / (-0.006 * t + 5.0) - 0.2;
    if (f < 0.0) f = 0.0;
    return f;
  endfunction

  // Back-gate voltage of a BG code: 10 mV per step.
  function automatic real ref_vbg(int code);
    return real'(code) * 0.01;
  endfunction

  // Current (uA) of one selected '1' cell at a back-gate voltage.
  function automatic real ref_icell(real vbg);
    return REF_I_ON_UA * ref_f(1000.0 * vbg);
  endfunction

  // ADC code of a current: round to the nearest LSB = I_ON / 16, saturate.
  function automatic longint ref_code(real i_ua, int width);
    longint c;
    c = longint'($floor(i_ua / (REF_I_ON_UA / 16.0) + 0.5));
    if (c < 0) c = 0;
    if (c > (longint'(1) << width) - 1) c = (longint'(1) << width) - 1;
    return c;
  endfunction

  function automatic logic [31:0] ref_xorshift(logic [31:0] x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

endpackage

// annealer_pkg: sizes, types and the device transfer function shared by the
// ferroelectric compute-in-memory (CiM) in-situ annealer.
//
// Number formats used across the design:
//  * A spin is one bit: 1 means +1, 0 means -1.
//  * sigma_r and sigma_c are ternary vectors {-1, 0, +1}; each element is a
//    tspin_t {nz, neg}.
//  * J_ij is stored as a K_BITS two's-complement number, one bit per cell.
//  * E_inc is a signed fixed-point number with ADC_FRAC fraction bits, in
//    units of one "normalized" cell current (f(T) of one cell storing '1').
//
// Following the paper: 3000 spins, 8 cells per J entry (8-to-1 multiplexed
// ADCs shared by every k columns), back-gate voltage from 0.7 V to 0 V in
// 10 mV steps, and the fractional annealing factor
// f(T) = 1/(-0.006T + 5) - 0.2. This design's own choices: two flipped spins
// per iteration, the 4 fractional ADC bits, the 9 uA cell current scale and
// the mapping T = 1000 * V_BG (0.7 V <-> T = 700).
package annealer_pkg;

  parameter int N_SPINS      = 3000;  // spins, also crossbar rows
  parameter int K_BITS       = 8;     // cells (bits) per J entry
  parameter int T_FLIP       = 2;     // spins flipped per iteration, |F|
  parameter int VBG_MAX_CODE = 70;    // 0.70 V in 10 mV steps
  parameter int T_MAX        = 700;   // temperature at V_BG = 0.7 V
  parameter int T_STEP       = 10;    // temperature per 10 mV step
  parameter int ADC_FRAC     = 4;     // ADC LSB = cell current / 2^ADC_FRAC
  parameter real I_ON_UA     = 9.0;   // cell current scale, uA
  parameter real VBG_LSB_V   = 0.01;  // BG DAC step, V

  parameter int TEMP_W = 10;
  parameter int VBG_W  = 7;

  // Ternary spin value of sigma_r / sigma_c.
  typedef struct packed {
    logic nz;   // element is non-zero
    logic neg;  // element is -1 (valid when nz)
  } tspin_t;

  // Sign combination driven onto the array in one phase: FG sign, DL sign.
  typedef enum logic [1:0] {
    PH_PP = 2'd0,  // sigma_r = +1 rows, sigma_c = +1 columns, product +
    PH_PN = 2'd1,  // +1 rows, -1 columns, product -
    PH_NP = 2'd2,  // -1 rows, +1 columns, product -
    PH_NN = 2'd3   // -1 rows, -1 columns, product +
  } phase_e;

  // Derived widths, as functions of the array height so that modules with
  // overridden sizes stay consistent.
  function automatic int adc_w(int n);
    return $clog2(n + 1) + ADC_FRAC + 1;
  endfunction
  function automatic int sa_w(int n, int k);
    return adc_w(n) + k + 1;
  endfunction
  function automatic int gs_w(int n, int k);
    return sa_w(n, k) + 2;
  endfunction
  function automatic int einc_w(int n, int k);
    return gs_w(n, k) + $clog2(n + 1);
  endfunction

  // Fractional annealing factor of the paper, clamped at zero.
  function automatic real f_of_t(real t);
    real f;
    f = 1.0 / (-0.006 * t + 5.0) - 0.2;
    return (f < 0.0) ? 0.0 : f;
  endfunction

  // Current of one selected cell storing '1' at a back-gate voltage, uA.
  function automatic real cell_current_ua(real vbg_v);
    return I_ON_UA * f_of_t(1000.0 * vbg_v);
  endfunction

  // Ideal ADC transfer: current (uA) to code, rounded and saturated.
  function automatic longint adc_transfer(real i_ua, int width);
    real    lsb;
    longint code;
    longint full;
    lsb  = I_ON_UA / real'(1 << ADC_FRAC);
    full = (longint'(1) << width) - 1;
    code = longint'($floor(i_ua / lsb + 0.5));
    if (code < 0) code = 0;
    if (code > full) code = full;
    return code;
  endfunction

endpackage

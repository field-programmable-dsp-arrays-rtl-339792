// fpda_tb_pkg -- helpers shared by the FPDA testbenches: LUT contents for
// the coefficient units, DCT coefficients and the Daubechies 8-tap filters.
//
// LUT contents follow the formulas given in the RTL headers:
//   FIR unit, tap coefficient c:  low LUT[n]  = c * n
//                                 high LUT[n] = c * signed4(n) * 16
//   DA row (k0..k3):              LUT[m] = sum of k_i over the set bits i of m
// Coefficients are integers (real value * 2^COEF_FRAC).
package fpda_tb_pkg;
  import fpda_pkg::*;

  function automatic logic [LUT_W-1:0] fir_lut_word(int c, bit hi, int n);
    int nib;
    nib = hi ? ((n >= 8) ? n - 16 : n) * 16 : n;
    return LUT_W'(c * nib);
  endfunction

  function automatic logic [LUT_W-1:0] da_lut_word(int k [4], int m);
    int s;
    s = 0;
    for (int i = 0; i < 4; i++) if (m[i]) s += k[i];
    return LUT_W'(s);
  endfunction

  // round(2^COEF_FRAC * cos((2n+1) k pi / 32)): 16-point DCT basis.
  function automatic int dct_coef(int k, int n);
    real v;
    v = $cos((2.0 * n + 1.0) * k * 3.14159265358979 / 32.0) * real'(1 << COEF_FRAC);
    return $rtoi(v + ((v >= 0.0) ? 0.5 : -0.5));
  endfunction

  // Daubechies 8-tap filters of the paper's table, times 2^8 and rounded.
  function automatic int db8(bit low, int t);
    real hi_c [8] = '{-0.0106, -0.0329, 0.0308, 0.1870, -0.0280, -0.6309, 0.7148, -0.2304};
    real lo_c [8] = '{0.2304, 0.7148, 0.6309, -0.0280, -0.1870, 0.0308, 0.0329, -0.0106};
    real v;
    v = (low ? lo_c[t] : hi_c[t]) * real'(1 << COEF_FRAC);
    return $rtoi(v + ((v >= 0.0) ? 0.5 : -0.5));
  endfunction
endpackage

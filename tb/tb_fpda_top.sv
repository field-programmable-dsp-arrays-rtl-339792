// tb_fpda_top -- end-to-end test of the whole array at its default sizes.
//
// Loads every LUT through the configuration port and runs each
// configuration in turn, switching modes with D3..D1:
//   FIR  16 taps, random coefficients, streamed samples
//   IIR  same forward LUTs plus 15 feed-backward taps
//   FIR  again after reloading the forward coefficients (reconfiguration)
//   DWT  3-level Daubechies-8 pyramid (all bands)
//   DCT  16-point blocks, including a block sent while busy (must be dropped)
//   FFT  16, 8, 4 and 2 points (the s2 scalability path)
//   code 0 (no configuration): input strobes must produce no output
// Each result is compared with a direct reference computed here. The run
// counts how often each mechanism happened and fails any that never did.
module tb_fpda_top;
  import fpda_pkg::*;
  import fpda_tb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, busy;
  logic [2:0] d_mode, fft_log2n;
  lut_cfg_t cfg;
  logic signed [7:0] x_re [16], x_im [16];
  logic signed [OUT_W-1:0] y [16], y_im [16];
  logic [15:0] y_lane;
  ctrl_t c;

  fpda_top dut (.clk, .rst_n, .d_mode, .cfg, .in_valid, .x_re, .x_im, .fft_log2n,
                .y, .y_im, .y_lane, .busy, .c);

  // Mechanism counters.
  int n_mode_switch = 0, n_fir = 0, n_iir = 0, n_reconf = 0, n_decim [4] = '{0, 0, 0, 0};
  int n_dct = 0, n_dct_sign = 0, n_busy_drop = 0, n_fft [5] = '{0, 0, 0, 0, 0}, n_idle_drop = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s", what);
    end
  endtask

  task automatic set_mode(int code);
    @(negedge clk);
    if (d_mode != 3'(code)) n_mode_switch++;
    d_mode = 3'(code);
    @(negedge clk);
    check(c == ((code >= 1 && code <= 5) ? ctrl_t'(1 << (code - 1)) : '0), "decoded controls");
  endtask

  task automatic cfg_write(cfg_unit_e unit, int idx, int entry, logic [LUT_W-1:0] data);
    @(negedge clk);
    cfg.we = 1; cfg.unit = unit; cfg.idx = 8'(idx); cfg.entry = 4'(entry); cfg.data = data;
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic load_fir_luts(cfg_unit_e unit, int base, int coef);
    for (int h = 0; h < 2; h++)
      for (int n = 0; n < 16; n++) cfg_write(unit, base + h, n, fir_lut_word(coef, h[0], n));
  endtask

  // ---------------------------------------------------------------- filter
  int a [16], b [16];

  task automatic run_filter(bit iir, int ns);
    int xs [64];
    int n_out;
    n_out = 0;
    for (int i = 0; i < ns; i++) xs[i] = int'($urandom_range(255)) - 128;
    for (int i = 0; i < ns + 6; i++) begin
      @(negedge clk);
      in_valid = (i < ns);
      x_re[0] = (i < ns) ? 8'(xs[i]) : 8'(0);
      if (y_lane[0]) begin
        int e;
        e = 0;
        // The filter's delay line still holds the previous run's samples for
        // the first outputs, so only outputs past the filter length are checked.
        if (n_out >= 16) begin
          for (int k = 0; k < 16; k++) e += a[k] * xs[n_out - k];
          if (iir) for (int m = 1; m < 16; m++) e += b[m] * xs[n_out - m];
          check(int'(y[0]) == e, $sformatf("%s y[%0d] = %0d, expected %0d", iir ? "IIR" : "FIR", n_out, y[0], e));
          if (iir) n_iir++; else n_fir++;
        end
        n_out++;
      end
    end
    in_valid = 0;
    check(n_out == ns, $sformatf("filter produced %0d outputs for %0d samples", n_out, ns));
  endtask

  // ------------------------------------------------------------------- DWT
  task automatic run_dwt(int ns);
    int xs [4][128];
    int eh [3][64], el [64];
    int nh [3], nl, len;
    nl = 0; nh = '{0, 0, 0};
    for (int i = 0; i < ns; i++) xs[0][i] = int'($urandom_range(255)) - 128;
    len = ns;
    for (int j = 0; j < 3; j++) begin
      for (int n = 0; n < len / 2; n++) begin
        int sh, sl, v;
        sh = 0; sl = 0;
        for (int k = 0; k < 8; k++) if (2*n - k >= 0) begin
          sh += db8(1'b0, k) * xs[j][2*n - k];
          sl += db8(1'b1, k) * xs[j][2*n - k];
        end
        eh[j][n] = sh;
        if (j == 2) el[n] = sl;
        v = sl >>> COEF_FRAC;
        xs[j+1][n] = (v > 127) ? 127 : (v < -128) ? -128 : v;
      end
      len /= 2;
    end
    // The DWT delay lines start from reset (all zero) in this run.
    for (int i = 0; i < ns + 20; i++) begin
      @(negedge clk);
      in_valid = (i < ns);
      x_re[0] = (i < ns) ? 8'(xs[0][i]) : 8'(0);
      for (int j = 0; j < 3; j++) if (y_lane[j]) begin
        check(int'(y[j]) == eh[j][nh[j]], $sformatf("DWT H%0d[%0d] = %0d, expected %0d", j+1, nh[j], y[j], eh[j][nh[j]]));
        nh[j]++; n_decim[j]++;
      end
      if (y_lane[3]) begin
        check(int'(y[3]) == el[nl], $sformatf("DWT L[%0d] = %0d, expected %0d", nl, y[3], el[nl]));
        nl++; n_decim[3]++;
      end
    end
    in_valid = 0;
    for (int j = 0; j < 3; j++) check(nh[j] == ns >> (j+1), $sformatf("DWT H%0d count %0d", j+1, nh[j]));
    check(nl == ns >> 3, "DWT L count");
  endtask

  // ------------------------------------------------------------------- DCT
  task automatic run_dct(int blk);
    int xv [16];
    int lat;
    bit neg;
    neg = 0;
    for (int i = 0; i < 16; i++) begin
      xv[i] = int'($urandom_range(255)) - 128;
      x_re[i] = 8'(xv[i]);
      if (xv[i] < 0) neg = 1;
    end
    @(negedge clk); in_valid = 1;
    @(negedge clk); in_valid = 0;
    lat = 1;
    // A second block sent while busy must be dropped.
    if (blk == 1) begin
      for (int i = 0; i < 16; i++) x_re[i] = 8'(0);
      check(busy, "DCT busy while running");
      in_valid = 1; @(negedge clk); in_valid = 0; lat++;
      n_busy_drop++;
    end
    while (!y_lane[0] && lat < 40) begin @(negedge clk); lat++; end
    check(lat == 12, $sformatf("DCT latency %0d", lat));
    for (int k = 0; k < 16; k++) begin
      int e;
      e = 0;
      for (int n = 0; n < 8; n++) e += dct_coef(k, n) * ((k % 2) ? xv[n] - xv[15-n] : xv[n] + xv[15-n]);
      check(int'(y[k]) == e, $sformatf("DCT Y%0d = %0d, expected %0d", k, y[k], e));
    end
    n_dct++;
    if (neg) n_dct_sign++;
    @(negedge clk);
    check(y_lane == '0, "DCT dropped block produced no second result");
  endtask

  // ------------------------------------------------------------------- FFT
  int BIN [5][16] = '{
    '{-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1},
    '{ 0,-1,-1,-1,-1,-1,-1,-1, 1,-1,-1,-1,-1,-1,-1,-1},
    '{ 0, 1,-1,-1,-1,-1,-1,-1, 2, 3,-1,-1,-1,-1,-1,-1},
    '{ 0, 2,-1,-1, 1, 3,-1,-1, 4, 6,-1,-1, 5, 7,-1,-1},
    '{ 0, 4, 1, 5, 2, 6, 3, 7, 8,12, 9,13,10,14,11,15}};

  task automatic run_fft(int m);
    real xr [16], xi [16];
    int lat, n;
    n = 1 << m;
    for (int i = 0; i < 16; i++) begin
      x_re[i] = 8'(int'($urandom_range(255)) - 128);
      x_im[i] = 8'(int'($urandom_range(255)) - 128);
      xr[i] = x_re[i]; xi[i] = x_im[i];
    end
    fft_log2n = 3'(m);
    @(negedge clk); in_valid = 1;
    @(negedge clk); in_valid = 0;
    lat = 1;
    while (!y_lane[0] && lat < 40) begin @(negedge clk); lat++; end
    check(lat == 2 + m, $sformatf("FFT n=%0d latency %0d", n, lat));
    for (int p = 0; p < 16; p++) if (BIN[m][p] >= 0) begin
      real er, ei, tol;
      er = 0.0; ei = 0.0;
      for (int t = 0; t < n; t++) begin
        real th;
        th = -2.0 * 3.14159265358979 * BIN[m][p] * t / n;
        er += xr[t] * $cos(th) - xi[t] * $sin(th);
        ei += xr[t] * $sin(th) + xi[t] * $cos(th);
      end
      tol = m + 1.0;
      check(y[p] - er <= tol && er - y[p] <= tol && y_im[p] - ei <= tol && ei - y_im[p] <= tol,
            $sformatf("FFT n=%0d B%0d", n, p));
    end
    n_fft[m]++;
  endtask

  // ------------------------------------------------------------------ main
  initial begin
    rst_n = 0; in_valid = 0; d_mode = 0; fft_log2n = 4; cfg = '0;
    for (int i = 0; i < 16; i++) begin x_re[i] = 0; x_im[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // Configuration data for every unit.
    for (int k = 0; k < 16; k++) a[k] = int'($urandom_range(300)) - 150;
    b[0] = 0;
    for (int m = 1; m < 16; m++) b[m] = int'($urandom_range(100)) - 50;
    for (int k = 0; k < 16; k++) load_fir_luts(CU_FILTER, 2*k, a[k]);
    for (int m = 1; m < 16; m++) load_fir_luts(CU_FILTER, 32 + 2*(m-1), b[m]);
    for (int j = 0; j < 3; j++)
      for (int band = 0; band < 2; band++)
        for (int k = 0; k < 8; k++) load_fir_luts(CU_DWT, 32*j + 16*band + 2*k, db8(band[0], k));
    for (int t = 0; t < 24; t++) begin
      int kk [4];
      int yk;
      yk = (t < 4) ? 4*t : (t < 8) ? 4*(t-4) + 2 : (t < 16) ? 2*(t-8) + 1 : 2*(t-16) + 1;
      for (int i = 0; i < 4; i++) kk[i] = dct_coef(yk, (t >= 16) ? 4 + i : i);
      for (int mm = 0; mm < 16; mm++) cfg_write(CU_DCT, t, mm, da_lut_word(kk, mm));
    end

    // No configuration selected: strobes are ignored.
    set_mode(0);
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); in_valid = 1; x_re[0] = 8'(i + 1);
      check(y_lane == '0, "no output without a configuration");
      n_idle_drop++;
    end
    @(negedge clk); in_valid = 0;

    set_mode(5); run_dwt(128);
    set_mode(1); run_filter(1'b0, 48);
    set_mode(2); run_filter(1'b1, 48);
    // Reconfigure the forward filter with new coefficients, then run FIR.
    for (int k = 0; k < 16; k++) begin
      a[k] = int'($urandom_range(300)) - 150;
      load_fir_luts(CU_FILTER, 2*k, a[k]);
    end
    n_reconf++;
    set_mode(1); run_filter(1'b0, 48);
    set_mode(3); for (int blk = 0; blk < 4; blk++) run_dct(blk);
    set_mode(4); for (int m = 4; m >= 1; m--) begin run_fft(m); run_fft(m); end
    set_mode(2); run_filter(1'b1, 40);

    $display("mechanisms: mode switches %0d, FIR %0d, IIR %0d, reconfigurations %0d",
             n_mode_switch, n_fir, n_iir, n_reconf);
    $display("            decimated H1 %0d H2 %0d H3 %0d L %0d", n_decim[0], n_decim[1], n_decim[2], n_decim[3]);
    $display("            DCT %0d (sign-bit subtract %0d), busy drops %0d, idle drops %0d",
             n_dct, n_dct_sign, n_busy_drop, n_idle_drop);
    $display("            FFT 16/8/4/2 points: %0d %0d %0d %0d", n_fft[4], n_fft[3], n_fft[2], n_fft[1]);
    check(n_mode_switch >= 5, "mode switches happened");
    check(n_fir > 0, "FIR outputs");
    check(n_iir > 0, "IIR outputs");
    check(n_reconf > 0, "reconfiguration");
    for (int j = 0; j < 4; j++) check(n_decim[j] > 0, $sformatf("decimation at band %0d", j));
    check(n_dct > 0 && n_dct_sign > 0, "DCT with sign-bit subtraction");
    check(n_busy_drop > 0, "busy drop");
    check(n_idle_drop > 0, "idle drop");
    for (int m = 1; m <= 4; m++) check(n_fft[m] > 0, $sformatf("FFT size %0d", 1 << m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

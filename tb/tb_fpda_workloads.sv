// tb_fpda_workloads -- the filter and transform sizes evaluated for the
// array, run on the top level at its default sizes:
//   FIR with 4, 8 and 16 taps (unused taps loaded with zero coefficients)
//   3-tap IIR  y[n] = a0 x[n] + a1 x[n-1] + a2 x[n-2] + b1 y[n-1] + b2 y[n-2],
//              realised by expanding the feedback into input terms: the
//              feed-backward LUTs hold the impulse-response tail h[m] - a[m],
//              m = 1..15. Compared with the true recursion, within the bound
//              set by coefficient rounding and the truncated tail.
//   8-point DCT as the even outputs of the 16-point DCT with x8..x15 = 0,
//              compared with a floating-point 8-point DCT sum.
// (FFT sizes 2..16 and the DWT are run in tb_fpda_top.)
module tb_fpda_workloads;
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

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", what); end
  endtask

  task automatic cfg_write(cfg_unit_e unit, int idx, int entry, logic [LUT_W-1:0] data);
    @(negedge clk);
    cfg.we = 1; cfg.unit = unit; cfg.idx = 8'(idx); cfg.entry = 4'(entry); cfg.data = data;
    @(negedge clk);
    cfg.we = 0;
  endtask

  task automatic load_tap(int lut_base, int coef);
    for (int h = 0; h < 2; h++)
      for (int n = 0; n < 16; n++) cfg_write(CU_FILTER, lut_base + h, n, fir_lut_word(coef, h[0], n));
  endtask

  // Streams ns samples (after 16 zeros that flush the delay lines) and
  // returns the outputs that belong to the samples.
  task automatic stream(int ns, int xs [64], output int ys [64]);
    int n_out;
    n_out = 0;
    for (int i = 0; i < 16 + ns + 6; i++) begin
      @(negedge clk);
      in_valid = (i < 16 + ns);
      x_re[0] = (i >= 16 && i < 16 + ns) ? 8'(xs[i-16]) : 8'(0);
      if (y_lane[0]) begin
        if (n_out >= 16) ys[n_out-16] = int'(y[0]);
        n_out++;
      end
    end
    in_valid = 0;
    check(n_out == 16 + ns, "one output per sample");
  endtask

  initial begin
    int xs [64], ys [64];
    rst_n = 0; in_valid = 0; d_mode = 0; fft_log2n = 4; cfg = '0;
    for (int i = 0; i < 16; i++) begin x_re[i] = 0; x_im[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) xs[i] = int'($urandom_range(255)) - 128;

    // ------------------------------------------------ FIR, 4 / 8 / 16 taps
    d_mode = 3'd1;
    for (int lg = 2; lg <= 4; lg++) begin
      int taps;
      int cf [16];
      taps = 1 << lg;
      for (int k = 0; k < 16; k++) begin
        cf[k] = (k < taps) ? int'($urandom_range(400)) - 200 : 0;
        load_tap(2*k, cf[k]);
      end
      stream(64, xs, ys);
      for (int n = 0; n < 64; n++) begin
        int e;
        e = 0;
        for (int k = 0; k < taps; k++) if (n - k >= 0) e += cf[k] * xs[n - k];
        check(ys[n] == e, $sformatf("%0d-tap FIR y[%0d] = %0d, expected %0d", taps, n, ys[n], e));
      end
      $display("%0d-tap FIR: 64 outputs checked", taps);
    end

    // ------------------------------------------------------- 3-tap IIR
    begin
      real a [3] = '{0.5, 0.25, 0.125};
      real b1 = 0.25, b2 = -0.125;
      real hr [16];
      real yr [64];
      real bound;
      int fq [16], tq [16];
      // Impulse response of the recursion.
      for (int m = 0; m < 16; m++) begin
        hr[m] = (m < 3) ? a[m] : 0.0;
        if (m >= 1) hr[m] += b1 * hr[m-1];
        if (m >= 2) hr[m] += b2 * hr[m-2];
      end
      // Forward taps hold a, feed-backward taps the tail h[m] - a[m].
      bound = 0.0;
      for (int m = 0; m < 16; m++) begin
        real fa, tail;
        fa = (m < 3) ? a[m] : 0.0;
        fq[m] = $rtoi(fa * 256.0);
        tail = (hr[m] - fa) * 256.0;
        tq[m] = (m == 0) ? 0 : $rtoi(tail + ((tail >= 0.0) ? 0.5 : -0.5));
        bound += ((tail - tq[m]) >= 0.0 ? (tail - tq[m]) : (tq[m] - tail)) * 128.0;
      end
      for (int k = 0; k < 16; k++) load_tap(2*k, fq[k]);
      for (int m = 1; m < 16; m++) load_tap(32 + 2*(m-1), tq[m]);
      d_mode = 3'd2;
      stream(64, xs, ys);
      // True recursion, scaled to Q8.
      for (int n = 0; n < 64; n++) begin
        yr[n] = 0.0;
        for (int k = 0; k < 3; k++) if (n - k >= 0) yr[n] += a[k] * xs[n-k];
        if (n >= 1) yr[n] += b1 * yr[n-1];
        if (n >= 2) yr[n] += b2 * yr[n-2];
      end
      // Tail beyond 15 taps: bounded by the response's remaining energy.
      begin
        real hn [64];
        for (int m = 0; m < 64; m++) begin
          hn[m] = (m < 3) ? a[m] : 0.0;
          if (m >= 1) hn[m] += b1 * hn[m-1];
          if (m >= 2) hn[m] += b2 * hn[m-2];
          if (m >= 16) bound += ((hn[m] >= 0.0) ? hn[m] : -hn[m]) * 256.0 * 128.0;
        end
      end
      for (int n = 0; n < 64; n++) begin
        real err;
        err = ys[n] - yr[n] * 256.0;
        if (err < 0.0) err = -err;
        check(err <= bound + 1.0, $sformatf("IIR y[%0d] = %0d, recursion %f (bound %f)", n, ys[n], yr[n] * 256.0, bound));
      end
      $display("3-tap IIR: 64 outputs within %f of the recursion (Q8 units)", bound);
    end

    // --------------------------------------------- 8-point DCT via 16-point
    for (int t = 0; t < 24; t++) begin
      int kk [4];
      int yk;
      yk = (t < 4) ? 4*t : (t < 8) ? 4*(t-4) + 2 : (t < 16) ? 2*(t-8) + 1 : 2*(t-16) + 1;
      for (int i = 0; i < 4; i++) kk[i] = dct_coef(yk, (t >= 16) ? 4 + i : i);
      for (int mm = 0; mm < 16; mm++) cfg_write(CU_DCT, t, mm, da_lut_word(kk, mm));
    end
    d_mode = 3'd3;
    for (int blk = 0; blk < 8; blk++) begin
      int xv [8];
      for (int i = 0; i < 16; i++) begin
        x_re[i] = (i < 8) ? 8'(int'($urandom_range(255)) - 128) : 8'(0);
        if (i < 8) xv[i] = x_re[i];
      end
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      while (!y_lane[0]) @(negedge clk);
      for (int k = 0; k < 8; k++) begin
        real e, err;
        e = 0.0;
        for (int n = 0; n < 8; n++) e += 256.0 * xv[n] * $cos((2.0*n + 1.0) * k * 3.14159265358979 / 16.0);
        err = y[2*k] - e;
        if (err < 0.0) err = -err;
        // Each of the 8 coefficients is rounded by at most 1/2 LSB.
        check(err <= 8 * 0.5 * 128.0, $sformatf("8-point DCT block %0d Y%0d = %0d, expected %f", blk, k, y[2*k], e));
      end
    end
    $display("8-point DCT: 8 blocks checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fft16 -- scalable FFT for 16, 8, 4 and 2 points against a
// floating-point DFT. Each size runs several random complex blocks; every
// output bin is compared (within the rounding of the twiddle products) at
// the position given by the documented output order, and the time from
// start to done must be 1 + log2n clocks. Back-to-back blocks check that a
// new start is taken right after done.
module tb_fft16;
  import fpda_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, done, busy;
  logic [2:0] log2n;
  logic signed [7:0]  x_re [16], x_im [16];
  logic signed [15:0] b_re [16], b_im [16];

  fft16 dut (.clk, .rst_n, .start, .log2n, .x_re, .x_im, .b_re, .b_im, .done, .busy);

  // Bin held by B position for each size (-1: unused position).
  int BIN [5][16] = '{
    '{-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1,-1},
    '{ 0,-1,-1,-1,-1,-1,-1,-1, 1,-1,-1,-1,-1,-1,-1,-1},
    '{ 0, 1,-1,-1,-1,-1,-1,-1, 2, 3,-1,-1,-1,-1,-1,-1},
    '{ 0, 2,-1,-1, 1, 3,-1,-1, 4, 6,-1,-1, 5, 7,-1,-1},
    '{ 0, 4, 1, 5, 2, 6, 3, 7, 8,12, 9,13,10,14,11,15}};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; log2n = 4;
    for (int i = 0; i < 16; i++) begin x_re[i] = 0; x_im[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 4; m >= 1; m--) begin
      for (int blk = 0; blk < 6; blk++) begin
        int n, lat;
        real xr [16], xi [16];
        n = 1 << m;
        for (int i = 0; i < 16; i++) begin
          x_re[i] = 8'(int'($urandom_range(255)) - 128);
          x_im[i] = 8'(int'($urandom_range(255)) - 128);
          xr[i] = x_re[i]; xi[i] = x_im[i];
        end
        log2n = 3'(m); start = 1;
        @(negedge clk); start = 0;
        lat = 1;
        while (!done && lat < 20) begin @(negedge clk); lat++; end
        checks++;
        if (lat != 1 + m) begin failures++; $display("FAIL n=%0d latency %0d", n, lat); end
        for (int p = 0; p < 16; p++) begin
          if (BIN[m][p] >= 0) begin
            real er, ei, tol;
            int k;
            k = BIN[m][p];
            er = 0.0; ei = 0.0;
            for (int t = 0; t < n; t++) begin
              real th;
              th = -2.0 * 3.14159265358979 * k * t / n;
              er += xr[t] * $cos(th) - xi[t] * $sin(th);
              ei += xr[t] * $sin(th) + xi[t] * $cos(th);
            end
            tol = 1.0 * m + 1.0;
            checks++;
            if (b_re[p] - er > tol || er - b_re[p] > tol || b_im[p] - ei > tol || ei - b_im[p] > tol) begin
              failures++;
              if (failures < 10) $display("FAIL n=%0d B%0d (X%0d) = %0d,%0d expected %f,%f",
                                          n, p, k, b_re[p], b_im[p], er, ei);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

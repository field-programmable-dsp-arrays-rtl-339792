// tb_butterfly -- DIF butterfly: p = a + b exactly and q = (a - b) w within
// rounding, against floating point, for all eight twiddles.
module tb_butterfly;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [15:0] a_re, a_im, b_re, b_im, p_re, p_im, q_re, q_im;
  twiddle_t tw;

  butterfly dut (.a_re, .a_im, .b_re, .b_im, .tw, .p_re, .p_im, .q_re, .q_im);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      real th, dr, di, er, ei;
      int k;
      k = t % 8;
      a_re = 16'(int'($urandom_range(8000)) - 4000);
      a_im = 16'(int'($urandom_range(8000)) - 4000);
      b_re = 16'(int'($urandom_range(8000)) - 4000);
      b_im = 16'(int'($urandom_range(8000)) - 4000);
      tw = twiddle(3'(k));
      th = -2.0 * 3.14159265358979 * k / 16.0;
      dr = a_re - b_re; di = a_im - b_im;
      er = dr * $cos(th) - di * $sin(th);
      ei = dr * $sin(th) + di * $cos(th);
      #1;
      checks += 4;
      if (p_re != a_re + b_re) failures++;
      if (p_im != a_im + b_im) failures++;
      if (q_re - er > 1.6 || er - q_re > 1.6) begin
        failures++; if (failures < 10) $display("FAIL q_re k=%0d: %0d vs %f", k, q_re, er);
      end
      if (q_im - ei > 1.6 || ei - q_im > 1.6) begin
        failures++; if (failures < 10) $display("FAIL q_im k=%0d: %0d vs %f", k, q_im, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

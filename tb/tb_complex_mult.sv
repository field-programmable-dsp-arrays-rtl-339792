// tb_complex_mult -- three-multiplier complex multiply against a
// floating-point (a + jb)(cos + j sin) for all eight W16 twiddles and random
// operands, within one LSB of rounding.
module tb_complex_mult;
  import fpda_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [15:0] a, b, r, i;
  twiddle_t tw;

  complex_mult dut (.a, .b, .c(tw.c), .cms(tw.cms), .cps(tw.cps), .r, .i);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      real th, er, ei;
      int k;
      k = t % 8;
      a = 16'(int'($urandom_range(16000)) - 8000);
      b = 16'(int'($urandom_range(16000)) - 8000);
      tw = twiddle(3'(k));
      th = -2.0 * 3.14159265358979 * k / 16.0;
      er = a * $cos(th) - b * $sin(th);
      ei = a * $sin(th) + b * $cos(th);
      #1;
      checks += 2;
      if (r - er > 1.6 || er - r > 1.6) begin
        failures++; if (failures < 10) $display("FAIL re k=%0d a=%0d b=%0d: %0d vs %f", k, a, b, r, er);
      end
      if (i - ei > 1.6 || ei - i > 1.6) begin
        failures++; if (failures < 10) $display("FAIL im k=%0d a=%0d b=%0d: %0d vs %f", k, a, b, i, ei);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

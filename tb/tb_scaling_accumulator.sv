// tb_scaling_accumulator -- random bit-serial sums: for B-step sequences of
// random LUT values L(B-1) .. L(0) (sign bit first) the result must be
// -L(B-1) 2^(B-1) + sum_{j<B-1} L(j) 2^j; idle clocks (en = 0) must hold it.
module tb_scaling_accumulator;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, en, sign;
  logic signed [18:0] lut_val;
  logic signed [31:0] y;

  scaling_accumulator dut (.clk, .rst_n, .en, .sign, .lut_val, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; en = 0; sign = 0; lut_val = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint e;
      int bits;
      bits = 2 + (t % 10);
      e = 0;
      for (int j = bits - 1; j >= 0; j--) begin
        int v;
        v = int'($urandom_range(4000)) - 2000;
        @(negedge clk);
        en = 1; sign = (j == bits - 1); lut_val = 19'(v);
        if (j == bits - 1) e -= longint'(v) <<< j;
        else               e += longint'(v) <<< j;
      end
      @(negedge clk); en = 0; sign = 0; lut_val = 19'(12345);
      @(negedge clk);
      checks++;
      if (longint'(y) != e) begin
        failures++; if (failures < 10) $display("FAIL sum %0d: %0d expected %0d", t, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

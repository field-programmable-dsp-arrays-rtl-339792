// tb_dct_input_comb -- exhaustive corner values and random quadruples: the
// four folded outputs must equal (a+b)+(c+d), (a+b)-(c+d), a-b and c-d.
module tb_dct_input_comb;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [7:0] a, b, c, d;
  logic signed [9:0] e, f;
  logic signed [8:0] g, h;

  dct_input_comb dut (.a, .b, .c, .d, .e, .f, .g, .h);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int va, int vb, int vc, int vd);
    a = 8'(va); b = 8'(vb); c = 8'(vc); d = 8'(vd);
    #1;
    checks++;
    if (int'(e) != (va + vb) + (vc + vd) || int'(f) != (va + vb) - (vc + vd) ||
        int'(g) != va - vb || int'(h) != vc - vd) begin
      failures++;
      if (failures < 10) $display("FAIL %0d %0d %0d %0d -> %0d %0d %0d %0d", va, vb, vc, vd, e, f, g, h);
    end
  endtask

  initial begin
    int corner [3] = '{-128, 0, 127};
    foreach (corner[i]) foreach (corner[j]) foreach (corner[k]) foreach (corner[l])
      check(corner[i], corner[j], corner[k], corner[l]);
    for (int t = 0; t < 1000; t++)
      check(int'($urandom_range(255)) - 128, int'($urandom_range(255)) - 128,
            int'($urandom_range(255)) - 128, int'($urandom_range(255)) - 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

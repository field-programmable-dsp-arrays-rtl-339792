// tb_fir_coef_unit -- loads the two nibble LUTs for several coefficients
// and checks p = c * x for all 256 two's-complement samples.
module tb_fir_coef_unit;
  import fpda_pkg::*;
  import fpda_tb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0]              x;
  logic [1:0]              cfg_we;
  logic [3:0]              cfg_entry;
  logic [LUT_W-1:0]        cfg_data;
  logic signed [LUT_W-1:0] p;

  fir_coef_unit dut (.clk, .x, .cfg_we, .cfg_entry, .cfg_data, .p);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cs [4] = '{183, -255, 1, -37};
    cfg_we = 0; cfg_entry = 0; cfg_data = 0; x = 0;
    foreach (cs[i]) begin
      for (int h = 0; h < 2; h++)
        for (int n = 0; n < 16; n++) begin
          @(negedge clk);
          cfg_we = 2'(1 << h); cfg_entry = 4'(n); cfg_data = fir_lut_word(cs[i], h[0], n);
        end
      @(negedge clk); cfg_we = 0;
      for (int v = -128; v < 128; v++) begin
        x = 8'(v); #1;
        checks++;
        if (int'(p) != cs[i] * v) begin
          failures++;
          if (failures < 10) $display("FAIL c=%0d x=%0d p=%0d", cs[i], v, p);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

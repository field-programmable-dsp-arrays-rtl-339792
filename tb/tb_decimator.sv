// tb_decimator -- 8-tap decimator loaded with the Daubechies low-pass
// filter. Samples stream in at one per clock; the outputs must be the
// even-indexed outputs of the direct convolution, one every 2 clocks.
module tb_decimator;
  import fpda_pkg::*;
  import fpda_tb_pkg::*;
  localparam int NS = 100;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, cfg_we;
  logic [7:0] x_in, cfg_idx;
  logic [3:0] cfg_entry;
  logic [LUT_W-1:0] cfg_data;
  logic signed [ACC_W-1:0] y;
  logic y_valid;

  decimator dut (.clk, .rst_n, .in_valid, .x_in, .cfg_we, .cfg_idx, .cfg_entry,
                 .cfg_data, .y, .y_valid);

  int c [8];
  int xs [NS];
  int n_out = 0, last_t = -1, cyc = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    #1;
    if (rst_n && y_valid) begin
      int e, n;
      n = 2 * n_out;
      e = 0;
      for (int k = 0; k < 8; k++) if (n - k >= 0) e += c[k] * xs[n - k];
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL y[%0d] = %0d, expected %0d", n_out, y, e);
      end
      if (last_t >= 0) begin
        checks++;
        if (cyc - last_t != 2) begin failures++; $display("FAIL output spacing %0d", cyc - last_t); end
      end
      last_t = cyc;
      n_out++;
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; cfg_we = 0; cfg_idx = 0; cfg_entry = 0; cfg_data = 0; x_in = 0;
    for (int k = 0; k < 8; k++) c[k] = db8(1'b1, k);
    for (int i = 0; i < NS; i++) xs[i] = int'($urandom_range(255)) - 128;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 8; k++)
      for (int h = 0; h < 2; h++)
        for (int n = 0; n < 16; n++) begin
          @(negedge clk);
          cfg_we = 1; cfg_idx = 8'(2*k + h); cfg_entry = 4'(n); cfg_data = fir_lut_word(c[k], h[0], n);
        end
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); in_valid = 1; x_in = 8'(xs[i]);
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != NS / 2) begin failures++; $display("FAIL %0d outputs for %0d inputs", n_out, NS); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

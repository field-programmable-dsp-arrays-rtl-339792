// tb_pda_filter -- FIR/IIR filter unit. In FIR mode the output must be the
// forward filter alone; in IIR mode the forward filter plus the 15-tap
// feed-backward filter on x[n-1]..x[n-15]. The feed-backward LUTs are
// loaded with the paper's 3-tap example expanded into input products
// (x1 * b2 a0 and x0 * b2 b1 a0 terms, i.e. taps 1 and 2) plus random taps.
// Both modes are checked sample by sample with a direct reference.
module tb_pda_filter;
  import fpda_pkg::*;
  import fpda_tb_pkg::*;
  localparam int NS = 120;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, en, iir, cfg_we;
  logic [7:0] x_in, cfg_idx;
  logic [3:0] cfg_entry;
  logic [LUT_W-1:0] cfg_data;
  logic signed [ACC_W-1:0] y;
  logic y_valid;

  pda_filter dut (.clk, .rst_n, .en, .iir, .x_in, .cfg_we, .cfg_idx, .cfg_entry,
                  .cfg_data, .y, .y_valid);

  int a [16], b [16];
  int xs [NS];
  int n_out;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (rst_n && y_valid) begin
      int e;
      e = 0;
      for (int k = 0; k < 16; k++) if (n_out - k >= 0) e += a[k] * xs[n_out - k];
      if (iir) for (int m = 1; m < 16; m++) if (n_out - m >= 0) e += b[m] * xs[n_out - m];
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL iir=%0d y[%0d] = %0d, expected %0d", iir, n_out, y, e);
      end
      n_out++;
    end
  end

  task automatic load(int idx, int c);
    for (int h = 0; h < 2; h++)
      for (int n = 0; n < 16; n++) begin
        @(negedge clk);
        cfg_we = 1; cfg_idx = 8'(2*idx + h); cfg_entry = 4'(n);
        cfg_data = fir_lut_word(c, h[0], n);
      end
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(bit mode);
    rst_n = 0; iir = mode; n_out = 0;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); en = 1; x_in = 8'(xs[i]);
    end
    @(negedge clk); en = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != NS) begin failures++; $display("FAIL iir=%0d: %0d outputs", mode, n_out); end
  endtask

  initial begin
    rst_n = 0; en = 0; iir = 0; cfg_we = 0; cfg_idx = 0; cfg_entry = 0; cfg_data = 0; x_in = 0;
    for (int k = 0; k < 16; k++) a[k] = int'($urandom_range(300)) - 150;
    b[0] = 0;
    for (int m = 1; m < 16; m++) b[m] = int'($urandom_range(100)) - 50;
    // 3-tap example: a0 = 0.5, b1 = 0.25, b2 = -0.5 in Q8; feedback expanded
    // into products of the input, scaled back to Q8.
    a[0] = 128; b[1] = (-128 * 128) / 256; b[2] = (((-128 * 64) / 256) * 128) / 256;
    for (int i = 0; i < NS; i++) xs[i] = int'($urandom_range(255)) - 128;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 16; k++) load(k, a[k]);
    for (int m = 1; m < 16; m++) load(16 + m - 1, b[m]);
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

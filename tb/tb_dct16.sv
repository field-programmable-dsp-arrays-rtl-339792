// tb_dct16 -- 16-point DA DCT. The 24 LUTs are loaded with subset sums of
// the integer DCT basis c(k,n) = round(256 cos((2n+1) k pi / 32)); each
// output Y_k must then equal sum_n c(k,n) x_n exactly. Random and extreme
// input blocks are run back to back and the start-to-done time must be
// B + 1 = 11 clocks.
module tb_dct16;
  import fpda_pkg::*;
  import fpda_tb_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, start, done, busy, cfg_we;
  logic signed [7:0] x [16];
  logic [7:0] cfg_idx;
  logic [3:0] cfg_entry;
  logic [LUT_W-1:0] cfg_data;
  logic signed [31:0] y [16];

  dct16 dut (.clk, .rst_n, .start, .x, .cfg_we, .cfg_idx, .cfg_entry, .cfg_data,
             .y, .done, .busy);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Row coefficients of LUT t (see dct16 header).
  function automatic void row(int t, output int k [4]);
    int yk;
    if (t < 4) begin
      yk = 4 * t;          // on e_i: samples i, 15-i, 7-i, 8+i share c(k,i)
      for (int i = 0; i < 4; i++) k[i] = dct_coef(yk, i);
    end else if (t < 8) begin
      yk = 4 * (t - 4) + 2;
      for (int i = 0; i < 4; i++) k[i] = dct_coef(yk, i);
    end else if (t < 16) begin
      yk = 2 * (t - 8) + 1;
      for (int i = 0; i < 4; i++) k[i] = dct_coef(yk, i);
    end else begin
      yk = 2 * (t - 16) + 1;
      for (int i = 0; i < 4; i++) k[i] = dct_coef(yk, 4 + i);
    end
  endfunction

  initial begin
    rst_n = 0; start = 0; cfg_we = 0; cfg_idx = 0; cfg_entry = 0; cfg_data = 0;
    for (int i = 0; i < 16; i++) x[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      int k [4];
      row(t, k);
      for (int m = 0; m < 16; m++) begin
        @(negedge clk);
        cfg_we = 1; cfg_idx = 8'(t); cfg_entry = 4'(m); cfg_data = da_lut_word(k, m);
      end
    end
    @(negedge clk); cfg_we = 0;
    for (int blk = 0; blk < 12; blk++) begin
      int xv [16];
      int lat;
      for (int i = 0; i < 16; i++) begin
        case (blk)
          0: xv[i] = 127;
          1: xv[i] = -128;
          2: xv[i] = (i % 2) ? -128 : 127;
          default: xv[i] = int'($urandom_range(255)) - 128;
        endcase
        x[i] = 8'(xv[i]);
      end
      start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 30) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 11) begin failures++; $display("FAIL latency %0d", lat); end
      for (int k = 0; k < 16; k++) begin
        int e;
        e = 0;
        for (int n = 0; n < 8; n++)
          e += dct_coef(k, n) * ((k % 2) ? xv[n] - xv[15-n] : xv[n] + xv[15-n]);
        checks++;
        if (int'(y[k]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL block %0d Y%0d = %0d, expected %0d", blk, k, y[k], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

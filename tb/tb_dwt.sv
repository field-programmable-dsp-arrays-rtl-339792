// tb_dwt -- 3-level Daubechies-8 DWT pyramid against a software pyramid:
// each level filters its input with the high- and low-pass filters, keeps
// every second output, and passes the low band (>> 8, saturated to 8 bits)
// to the next level. Every band output of every level is compared, and the
// number of outputs per band must be NS / 2^level.
module tb_dwt;
  import fpda_pkg::*;
  import fpda_tb_pkg::*;
  localparam int NS = 128;
  localparam int L  = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid, cfg_we;
  logic [7:0] x_in, cfg_idx;
  logic [3:0] cfg_entry;
  logic [LUT_W-1:0] cfg_data;
  logic signed [ACC_W-1:0] h [L];
  logic [L-1:0] h_valid;
  logic signed [ACC_W-1:0] l;
  logic l_valid;

  dwt dut (.clk, .rst_n, .in_valid, .x_in, .cfg_we, .cfg_idx, .cfg_entry, .cfg_data,
           .h, .h_valid, .l, .l_valid);

  int xs [L+1][NS];      // input of each level
  int eh [L][NS], el [L][NS];
  int nh [L], nl;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      for (int j = 0; j < L; j++) if (h_valid[j]) begin
        checks++;
        if (int'(h[j]) != eh[j][nh[j]]) begin
          failures++;
          if (failures < 10) $display("FAIL H%0d[%0d] = %0d, expected %0d", j+1, nh[j], h[j], eh[j][nh[j]]);
        end
        nh[j]++;
      end
      if (l_valid) begin
        checks++;
        if (int'(l) != el[L-1][nl]) begin
          failures++;
          if (failures < 10) $display("FAIL L[%0d] = %0d, expected %0d", nl, l, el[L-1][nl]);
        end
        nl++;
      end
    end
  end

  initial begin
    int len;
    rst_n = 0; in_valid = 0; cfg_we = 0; cfg_idx = 0; cfg_entry = 0; cfg_data = 0; x_in = 0;
    nl = 0;
    for (int j = 0; j < L; j++) nh[j] = 0;
    for (int i = 0; i < NS; i++) xs[0][i] = int'($urandom_range(255)) - 128;
    // Reference pyramid.
    len = NS;
    for (int j = 0; j < L; j++) begin
      for (int n = 0; n < len / 2; n++) begin
        int sh, sl, v;
        sh = 0; sl = 0;
        for (int k = 0; k < 8; k++) if (2*n - k >= 0) begin
          sh += db8(1'b0, k) * xs[j][2*n - k];
          sl += db8(1'b1, k) * xs[j][2*n - k];
        end
        eh[j][n] = sh; el[j][n] = sl;
        v = sl >>> COEF_FRAC;
        xs[j+1][n] = (v > 127) ? 127 : (v < -128) ? -128 : v;
      end
      len = len / 2;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < L; j++)
      for (int band = 0; band < 2; band++)
        for (int k = 0; k < 8; k++)
          for (int hh = 0; hh < 2; hh++)
            for (int n = 0; n < 16; n++) begin
              @(negedge clk);
              cfg_we = 1; cfg_idx = 8'(32*j + 16*band + 2*k + hh); cfg_entry = 4'(n);
              cfg_data = fir_lut_word(db8(band[0], k), hh[0], n);
            end
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < NS; i++) begin
      @(negedge clk); in_valid = 1; x_in = 8'(xs[0][i]);
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);
    for (int j = 0; j < L; j++) begin
      checks++;
      if (nh[j] != NS >> (j+1)) begin failures++; $display("FAIL H%0d: %0d outputs", j+1, nh[j]); end
    end
    checks++;
    if (nl != NS >> L) begin failures++; $display("FAIL L: %0d outputs", nl); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pda_fir -- 16-tap parallel-DA FIR against a direct convolution.
// Random coefficients are loaded into the 32 LUTs, random samples are
// streamed with occasional gaps, and every output is compared with
// sum c_k x[n-k]. The 2-clock latency and one output per sample are checked
// on every clock.
module tb_pda_fir;
  import fpda_pkg::*;
  import fpda_tb_pkg::*;
  localparam int TAPS = 16;
  localparam int NS   = 200;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, en, cfg_we;
  logic [7:0] x_in, x_q, cfg_idx;
  logic [3:0] cfg_entry;
  logic [LUT_W-1:0] cfg_data;
  logic signed [ACC_W-1:0] y;
  logic y_valid;

  pda_fir dut (.clk, .rst_n, .en, .x_in, .cfg_we, .cfg_idx, .cfg_entry, .cfg_data,
               .x_q, .y, .y_valid);

  int coef [TAPS];
  int xs [NS];
  int n_in = 0, n_out = 0;
  logic en_d1 = 0, en_d2 = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    en_d2 <= en_d1; en_d1 <= en;
    #1;
    if (rst_n) begin
      checks++;
      if (y_valid !== en_d2) begin failures++; $display("FAIL latency at out %0d", n_out); end
      if (y_valid) begin
        int e;
        e = 0;
        for (int k = 0; k < TAPS; k++) if (n_out - k >= 0) e += coef[k] * xs[n_out - k];
        checks++;
        if (int'(y) != e) begin
          failures++;
          if (failures < 10) $display("FAIL y[%0d] = %0d, expected %0d", n_out, y, e);
        end
        n_out++;
      end
    end
  end

  initial begin
    rst_n = 0; en = 0; cfg_we = 0; cfg_idx = 0; cfg_entry = 0; cfg_data = 0; x_in = 0;
    for (int k = 0; k < TAPS; k++) coef[k] = int'($urandom_range(510)) - 255;
    for (int i = 0; i < NS; i++) xs[i] = int'($urandom_range(255)) - 128;
    xs[0] = -128; xs[1] = 127;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < TAPS; k++)
      for (int h = 0; h < 2; h++)
        for (int n = 0; n < 16; n++) begin
          @(negedge clk);
          cfg_we = 1; cfg_idx = 8'(2*k + h); cfg_entry = 4'(n);
          cfg_data = fir_lut_word(coef[k], h[0], n);
        end
    @(negedge clk); cfg_we = 0;
    while (n_in < NS) begin
      @(negedge clk);
      if ($urandom_range(9) == 0) en = 0;
      else begin en = 1; x_in = 8'(xs[n_in]); n_in++; end
    end
    @(negedge clk); en = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (n_out != NS) begin failures++; $display("FAIL %0d outputs for %0d samples", n_out, NS); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

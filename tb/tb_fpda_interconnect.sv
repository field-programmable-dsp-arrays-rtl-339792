// tb_fpda_interconnect -- drives each configuration with random unit
// results and strobes and checks that only the configured unit gets the
// input strobe, that its results reach the documented lanes one clock later
// with the right lane strobes, and that other units' strobes are ignored.
module tb_fpda_interconnect;
  import fpda_pkg::*;
  localparam int L = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, in_valid;
  ctrl_t c;
  logic filt_en, filt_iir, dwt_en, dct_start, fft_start;
  logic signed [ACC_W-1:0] filt_y, dwt_h [L], dwt_l;
  logic filt_v, dwt_lv, dct_done, fft_done;
  logic [L-1:0] dwt_hv;
  logic signed [31:0] dct_y [16];
  logic signed [FFT_W-1:0] fft_re [16], fft_im [16];
  logic signed [OUT_W-1:0] y [16], y_im [16];
  logic [15:0] y_lane;

  fpda_interconnect dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; c = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int f;
      logic [15:0] exp_lane;
      int exp_y [16], exp_yi [16];
      f = t % 5;
      c = ctrl_t'(1 << f);
      in_valid = 1'($urandom_range(1));
      filt_y = ACC_W'($urandom); filt_v = 1'($urandom_range(1));
      for (int j = 0; j < L; j++) dwt_h[j] = ACC_W'($urandom);
      dwt_hv = L'($urandom); dwt_l = ACC_W'($urandom); dwt_lv = 1'($urandom_range(1));
      for (int i = 0; i < 16; i++) begin
        dct_y[i] = 32'($urandom); fft_re[i] = 16'($urandom); fft_im[i] = 16'($urandom);
      end
      dct_done = 1'($urandom_range(1)); fft_done = 1'($urandom_range(1));
      #1;
      checks++;
      if ({fft_start, dct_start, dwt_en, filt_en} !==
          {in_valid && f == 3, in_valid && f == 2, in_valid && f == 4, in_valid && f < 2} ||
          filt_iir !== (f == 1)) begin
        failures++; $display("FAIL strobes for function %0d", f);
      end
      exp_lane = '0;
      for (int i = 0; i < 16; i++) begin exp_y[i] = y[i]; exp_yi[i] = y_im[i]; end
      case (f)
        0, 1: begin exp_lane[0] = filt_v; if (filt_v) begin exp_y[0] = int'(filt_y); exp_yi[0] = 0; end end
        4: begin
          for (int j = 0; j < L; j++) begin exp_lane[j] = dwt_hv[j]; if (dwt_hv[j]) begin exp_y[j] = int'(dwt_h[j]); exp_yi[j] = 0; end end
          exp_lane[L] = dwt_lv; if (dwt_lv) begin exp_y[L] = int'(dwt_l); exp_yi[L] = 0; end
        end
        2: begin exp_lane = {16{dct_done}}; if (dct_done) for (int i = 0; i < 16; i++) begin exp_y[i] = dct_y[i]; exp_yi[i] = 0; end end
        default: begin exp_lane = {16{fft_done}}; if (fft_done) for (int i = 0; i < 16; i++) begin exp_y[i] = int'(fft_re[i]); exp_yi[i] = int'(fft_im[i]); end end
      endcase
      @(posedge clk); #1;
      checks++;
      if (y_lane !== exp_lane) begin failures++; $display("FAIL lanes f=%0d %h vs %h", f, y_lane, exp_lane); end
      for (int i = 0; i < 16; i++) begin
        checks++;
        if (int'(y[i]) != exp_y[i] || int'(y_im[i]) != exp_yi[i]) begin
          failures++; if (failures < 10) $display("FAIL f=%0d lane %0d", f, i);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// fpda_interconnect -- routing between the array's inputs, function units and
// output lanes for the configuration selected by C1..C5.
//
// The input strobe reaches only the configured unit (the others hold their
// state), and the configured unit's results are steered into 16 registered
// output lanes, each with its own strobe in y_lane:
//   FIR, IIR  lane 0 = filter output, one per sample
//   DWT       lane j = high band of level j+1, lane LEVELS = last low band
//   DCT       lanes 0..15 = Y0..Y15
//   FFT       lanes 0..15 = B0..B15 (real in y, imaginary in y_im)
// Registering the lanes leaves no combinational path from input to output.
// The paper describes this matrix only by its function; this steering of
// whole function units (rather than of individual adders and LUTs) is this
// design's choice.
module fpda_interconnect #(
  parameter int unsigned LEVELS = 3
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  fpda_pkg::ctrl_t                      c,
  input  logic                                 in_valid,
  // strobes to the units
  output logic                                 filt_en,
  output logic                                 filt_iir,
  output logic                                 dwt_en,
  output logic                                 dct_start,
  output logic                                 fft_start,
  // unit results
  input  logic signed [fpda_pkg::ACC_W-1:0]    filt_y,
  input  logic                                 filt_v,
  input  logic signed [fpda_pkg::ACC_W-1:0]    dwt_h [LEVELS],
  input  logic [LEVELS-1:0]                    dwt_hv,
  input  logic signed [fpda_pkg::ACC_W-1:0]    dwt_l,
  input  logic                                 dwt_lv,
  input  logic signed [31:0]                   dct_y [16],
  input  logic                                 dct_done,
  input  logic signed [fpda_pkg::FFT_W-1:0]    fft_re [16],
  input  logic signed [fpda_pkg::FFT_W-1:0]    fft_im [16],
  input  logic                                 fft_done,
  // output lanes
  output logic signed [fpda_pkg::OUT_W-1:0]    y [16],
  output logic signed [fpda_pkg::OUT_W-1:0]    y_im [16],
  output logic [15:0]                          y_lane
);
  import fpda_pkg::*;

  assign filt_en   = in_valid && (c[FN_FIR] || c[FN_IIR]);
  // The filter's FIR/IIR select is control signal C2 itself.
  assign filt_iir  = c[FN_IIR];
  assign dwt_en    = in_valid && c[FN_DWT];
  assign dct_start = in_valid && c[FN_DCT];
  assign fft_start = in_valid && c[FN_FFT];

  logic signed [OUT_W-1:0] ny [16], nyi [16];
  logic [15:0]             nl;

  always_comb begin
    for (int i = 0; i < 16; i++) begin
      ny[i]  = '0;
      nyi[i] = '0;
    end
    nl = '0;
    unique case (1'b1)
      c[FN_FIR], c[FN_IIR]: begin
        ny[0] = OUT_W'(filt_y);
        nl[0] = filt_v;
      end
      c[FN_DWT]: begin
        for (int j = 0; j < LEVELS; j++) begin
          ny[j] = OUT_W'(dwt_h[j]);
          nl[j] = dwt_hv[j];
        end
        ny[LEVELS] = OUT_W'(dwt_l);
        nl[LEVELS] = dwt_lv;
      end
      c[FN_DCT]: begin
        for (int i = 0; i < 16; i++) ny[i] = OUT_W'(dct_y[i]);
        nl = {16{dct_done}};
      end
      c[FN_FFT]: begin
        for (int i = 0; i < 16; i++) begin
          ny[i]  = OUT_W'(fft_re[i]);
          nyi[i] = OUT_W'(fft_im[i]);
        end
        nl = {16{fft_done}};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_lane <= '0;
      for (int i = 0; i < 16; i++) begin
        y[i] <= '0; y_im[i] <= '0;
      end
    end else begin
      y_lane <= nl;
      for (int i = 0; i < 16; i++) begin
        if (nl[i]) begin
          y[i]    <= ny[i];
          y_im[i] <= nyi[i];
        end
      end
    end
  end

  // One configuration at a time.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(c))
    else $error("fpda_interconnect: more than one configuration selected");
endmodule

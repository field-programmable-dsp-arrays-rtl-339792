// fpda_top -- field programmable DSP array: one reconfigurable datapath for
// FIR, IIR, DCT, FFT and DWT.
//
// The mode decoder turns the code D3..D1 into the one-hot controls C1..C5;
// the interconnect sends the input strobe to the configured function unit
// and its results to the 16 output lanes. Function units:
//   pda_filter  16-tap parallel-DA FIR; plus a 15-tap feed-backward filter
//               and an adder in IIR mode (C1 / C2), sharing the LUTs
//   dct16       16-point DA DCT with 24 LUTs and 16 scaling accumulators (C3)
//   fft16       scalable 2..16-point iterative FFT, 8 butterflies (C4)
//   dwt         3-level Mallat pyramid of 8-tap decimators (C5)
// All coefficients live in LUTs, loaded through the cfg port (one 16-entry
// LUT word per write), so changing function or coefficients needs no change
// of hardware. The FFT twiddles are a fixed table.
//
// Interface: in_valid with x_re[0] is one sample for FIR, IIR and DWT (up to
// one per clock); in_valid with x_re[0..15] (and x_im for the FFT) starts a
// DCT or FFT block, accepted while busy is low. Results appear in y/y_im with
// per-lane strobes y_lane, one clock after the unit produces them. c shows
// the decoded C1..C5. Widths and timing are this design's choices.
module fpda_top (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [2:0]                           d_mode,
  input  fpda_pkg::lut_cfg_t                   cfg,
  input  logic                                 in_valid,
  input  logic signed [fpda_pkg::DATA_W-1:0]   x_re [16],
  input  logic signed [fpda_pkg::DATA_W-1:0]   x_im [16],
  input  logic [2:0]                           fft_log2n,
  output logic signed [fpda_pkg::OUT_W-1:0]    y [16],
  output logic signed [fpda_pkg::OUT_W-1:0]    y_im [16],
  output logic [15:0]                          y_lane,
  output logic                                 busy,
  output fpda_pkg::ctrl_t                      c
);
  import fpda_pkg::*;

  localparam int unsigned LEVELS = 3;

  logic filt_en, filt_iir, dwt_en, dct_start, fft_start;
  logic signed [ACC_W-1:0] filt_y, dwt_h [LEVELS], dwt_l;
  logic                    filt_v, dwt_lv, dct_done, dct_busy, fft_done, fft_busy;
  logic [LEVELS-1:0]       dwt_hv;
  logic signed [31:0]      dct_y [16];
  logic signed [FFT_W-1:0] fft_re [16], fft_im [16];

  mode_decoder u_dec (.d(d_mode), .c);

  fpda_interconnect #(.LEVELS(LEVELS)) u_ic (
    .clk, .rst_n, .c, .in_valid,
    .filt_en, .filt_iir, .dwt_en, .dct_start, .fft_start,
    .filt_y, .filt_v, .dwt_h, .dwt_hv, .dwt_l, .dwt_lv,
    .dct_y, .dct_done, .fft_re, .fft_im, .fft_done,
    .y, .y_im, .y_lane
  );

  pda_filter u_filt (
    .clk, .rst_n, .en(filt_en), .iir(filt_iir), .x_in(x_re[0]),
    .cfg_we(cfg.we && cfg.unit == CU_FILTER), .cfg_idx(cfg.idx),
    .cfg_entry(cfg.entry), .cfg_data(cfg.data),
    .y(filt_y), .y_valid(filt_v)
  );

  dwt #(.LEVELS(LEVELS)) u_dwt (
    .clk, .rst_n, .in_valid(dwt_en), .x_in(x_re[0]),
    .cfg_we(cfg.we && cfg.unit == CU_DWT), .cfg_idx(cfg.idx),
    .cfg_entry(cfg.entry), .cfg_data(cfg.data),
    .h(dwt_h), .h_valid(dwt_hv), .l(dwt_l), .l_valid(dwt_lv)
  );

  dct16 u_dct (
    .clk, .rst_n, .start(dct_start), .x(x_re),
    .cfg_we(cfg.we && cfg.unit == CU_DCT), .cfg_idx(cfg.idx),
    .cfg_entry(cfg.entry), .cfg_data(cfg.data),
    .y(dct_y), .done(dct_done), .busy(dct_busy)
  );

  fft16 u_fft (
    .clk, .rst_n, .start(fft_start), .log2n(fft_log2n), .x_re, .x_im,
    .b_re(fft_re), .b_im(fft_im), .done(fft_done), .busy(fft_busy)
  );

  assign busy = (c[FN_DCT] && dct_busy) || (c[FN_FFT] && fft_busy);
endmodule

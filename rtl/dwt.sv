// dwt -- forward discrete wavelet transform by Mallat's pyramid.
//
// Each level splits its input into a high-pass (wavelet) band and a low-pass
// (scaling) band with two decimators (8-tap parallel-DA FIR + keep every
// second output). The high band is an output; the low band, shifted right by
// COEF_FRAC fractional coefficient bits and saturated to the 8-bit sample
// width, is the next level's input. With LEVELS = 3 the outputs are the
// paper's H1, H2, H3 (high bands) and H4 (the last low band). The filter
// coefficients, e.g. the Daubechies 8-tap pair, are LUT contents.
//
// Interface: in_valid strobes one sample per clock at most. Level j's bands
// appear once every 2^j input samples, each with its own strobe in h_valid
// and l_valid. LUT writes: cfg_idx = level*32 + band*16 + n, band 0 the
// high-pass and 1 the low-pass decimator, n as in pda_fir. The requantisation
// between levels is this design's choice.
module dwt #(
  parameter int unsigned LEVELS    = 3,
  parameter int unsigned COEF_FRAC = fpda_pkg::COEF_FRAC
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  logic [fpda_pkg::DATA_W-1:0]          x_in,
  input  logic                                 cfg_we,
  input  logic [7:0]                           cfg_idx,
  input  logic [3:0]                           cfg_entry,
  input  logic [fpda_pkg::LUT_W-1:0]           cfg_data,
  output logic signed [fpda_pkg::ACC_W-1:0]    h [LEVELS],
  output logic [LEVELS-1:0]                    h_valid,
  output logic signed [fpda_pkg::ACC_W-1:0]    l,
  output logic                                 l_valid
);
  import fpda_pkg::*;

  localparam logic signed [ACC_W-1:0] SMAX = ACC_W'((1 <<< (DATA_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] SMIN = -ACC_W'(1 <<< (DATA_W-1));

  logic [DATA_W-1:0]       lv_x [LEVELS+1];
  logic                    lv_v [LEVELS+1];
  logic signed [ACC_W-1:0] lo_y [LEVELS];
  logic                    lo_v [LEVELS];

  assign lv_x[0] = x_in;
  assign lv_v[0] = in_valid;

  for (genvar j = 0; j < LEVELS; j++) begin : g_level
    logic signed [ACC_W-1:0] scaled;

    decimator #(.TAPS(8)) u_hi (
      .clk, .rst_n, .in_valid(lv_v[j]), .x_in(lv_x[j]),
      .cfg_we(cfg_we && cfg_idx[7:4] == 4'(2*j)), .cfg_idx({4'd0, cfg_idx[3:0]}),
      .cfg_entry, .cfg_data, .y(h[j]), .y_valid(h_valid[j])
    );
    decimator #(.TAPS(8)) u_lo (
      .clk, .rst_n, .in_valid(lv_v[j]), .x_in(lv_x[j]),
      .cfg_we(cfg_we && cfg_idx[7:4] == 4'(2*j+1)), .cfg_idx({4'd0, cfg_idx[3:0]}),
      .cfg_entry, .cfg_data, .y(lo_y[j]), .y_valid(lo_v[j])
    );

    // Requantise the low band to a sample for the next level.
    assign scaled = lo_y[j] >>> COEF_FRAC;
    assign lv_x[j+1] = (scaled > SMAX) ? SMAX[DATA_W-1:0] :
                       (scaled < SMIN) ? SMIN[DATA_W-1:0] : scaled[DATA_W-1:0];
    assign lv_v[j+1] = lo_v[j];
  end

  assign l       = lo_y[LEVELS-1];
  assign l_valid = lo_v[LEVELS-1];
endmodule

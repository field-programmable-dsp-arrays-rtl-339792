// fpda_pkg -- types and constants shared by the FPDA (field programmable DSP
// array) datapaths.
//
// The array is built from fixed common modules (LUTs, adders, subtractors,
// multipliers, scaling accumulators) that a decoder configures for one of five
// DSP functions at a time. This package holds the word widths, the one-hot
// control-signal encoding of the five configuration modes (C1..C5 as in the
// paper's mode table), the LUT configuration write record that every LUT-based
// unit decodes, and the FFT twiddle table.
//
// Word widths are this design's choice; the paper prints only the 8-bit
// sample (bits X[0]..X[7] of its FIR unit figure) and the 16-point sizes.
package fpda_pkg;

  // Sample width at the array's inputs.
  localparam int unsigned DATA_W = 8;
  // Width of one LUT word (precomputed DA partial product).
  localparam int unsigned LUT_W  = 18;
  // Filter accumulator width (sum of 16 products of LUT_W bits).
  localparam int unsigned ACC_W  = 24;
  // Width of the array's output lanes.
  localparam int unsigned OUT_W  = 32;
  // FFT register width and twiddle format (Q2.14).
  localparam int unsigned FFT_W   = 16;
  localparam int unsigned TW_W    = 16;
  localparam int unsigned TW_FRAC = 14;
  // Fractional bits assumed for filter coefficients held in the LUTs (used
  // only where the datapath itself must requantise: between DWT levels).
  localparam int unsigned COEF_FRAC = 8;

  // Bit positions of the control signals C1..C5 (paper's mode table).
  typedef enum logic [2:0] {
    FN_FIR = 3'd0,  // C1
    FN_IIR = 3'd1,  // C2
    FN_DCT = 3'd2,  // C3
    FN_FFT = 3'd3,  // C4
    FN_DWT = 3'd4   // C5
  } fn_e;

  typedef logic [4:0] ctrl_t;  // ctrl_t[FN_x] is control signal C(x+1)

  // Which LUT-holding unit a configuration write is meant for.
  typedef enum logic [1:0] {
    CU_FILTER = 2'd0,  // FIR/IIR filter: LUT 0..31 forward, 32..61 feed-backward
    CU_DWT    = 2'd1,  // DWT: LUT level*32 + band*16 + n (band 0 high, 1 low)
    CU_DCT    = 2'd2   // DCT: LUT 0..23
  } cfg_unit_e;

  typedef struct packed {
    logic             we;
    cfg_unit_e        unit;
    logic [7:0]       idx;    // LUT number inside the unit
    logic [3:0]       entry;  // entry inside the 16-entry LUT
    logic [LUT_W-1:0] data;
  } lut_cfg_t;

  // One twiddle: cos, cos-sin and cos+sin of theta = -2*pi*k/16, Q2.14.
  typedef struct packed {
    logic signed [TW_W-1:0] c;
    logic signed [TW_W-1:0] cms;
    logic signed [TW_W-1:0] cps;
  } twiddle_t;

  // W16^k for k = 0..7, theta = -2 pi k/16: with c = cos(theta) and
  // s = sin(theta), the entries are round(2^14 c), round(2^14 (c-s)) and
  // round(2^14 (c+s)).
  function automatic twiddle_t twiddle(input logic [2:0] k);
    case (k)
      3'd0: twiddle = '{ 16'sd16384,  16'sd16384,  16'sd16384};
      3'd1: twiddle = '{ 16'sd15137,  16'sd21407,  16'sd8867 };
      3'd2: twiddle = '{ 16'sd11585,  16'sd23170,  16'sd0    };
      3'd3: twiddle = '{ 16'sd6270,   16'sd21407, -16'sd8867 };
      3'd4: twiddle = '{ 16'sd0,      16'sd16384, -16'sd16384};
      3'd5: twiddle = '{-16'sd6270,   16'sd8867,  -16'sd21407};
      3'd6: twiddle = '{-16'sd11585,  16'sd0,     -16'sd23170};
      default: twiddle = '{-16'sd15137, -16'sd8867, -16'sd21407};
    endcase
  endfunction

endpackage

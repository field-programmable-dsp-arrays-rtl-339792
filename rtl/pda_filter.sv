// pda_filter -- the FIR/IIR filter function of the array (modes C1 and C2).
//
// Two parallel-DA FIR filters and one adder. The forward filter (TAPS taps)
// filters x[n]..x[n-TAPS+1]. The feed-backward filter (FB_TAPS taps) is fed
// by the same input stream, one sample later, so it filters x[n-1]..
// x[n-FB_TAPS]; its LUTs hold the feedback coefficients expanded into
// products of the input, as the paper does when it rewrites the 3-tap IIR
// feedback terms in terms of x. In IIR mode the adder sums the two filters;
// in FIR mode a 2:1 mux passes the forward filter alone, so both modes share
// the forward filter's 32 LUTs.
//
// The two delay lines hold 16 + 15 = 31 sample registers, the paper's count
// for its IIR filter.
//
// Note that the feed-backward filter does not take y as its input: the IIR
// response is the truncated expansion loaded into its LUTs. This follows the
// paper's implementation text rather than its recursive difference equation.
//
// Interface: en strobes one sample in; y/y_valid follow 2 clocks later, one
// output per sample. cfg_idx 0..2*TAPS-1 address the forward filter's LUTs,
// 2*TAPS.. the feed-backward filter's (2*k low nibble, 2*k+1 high nibble).
module pda_filter #(
  parameter int unsigned TAPS    = 16,
  parameter int unsigned FB_TAPS = 15
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 en,
  input  logic                                 iir,
  input  logic [fpda_pkg::DATA_W-1:0]          x_in,
  input  logic                                 cfg_we,
  input  logic [7:0]                           cfg_idx,
  input  logic [3:0]                           cfg_entry,
  input  logic [fpda_pkg::LUT_W-1:0]           cfg_data,
  output logic signed [fpda_pkg::ACC_W-1:0]    y,
  output logic                                 y_valid
);
  import fpda_pkg::*;

  logic [DATA_W-1:0]       x_fwd;
  logic signed [ACC_W-1:0] y_fwd, y_fb;
  logic                    v_fwd, v_fb;

  pda_fir #(.TAPS(TAPS)) u_fwd (
    .clk, .rst_n, .en, .x_in,
    .cfg_we   (cfg_we && cfg_idx < 8'(2*TAPS)),
    .cfg_idx, .cfg_entry, .cfg_data,
    .x_q(x_fwd), .y(y_fwd), .y_valid(v_fwd)
  );

  // The newest sample of the forward delay line is x[n-1] at the next
  // strobe, so this filter's taps span x[n-1]..x[n-FB_TAPS].
  pda_fir #(.TAPS(FB_TAPS)) u_fb (
    .clk, .rst_n, .en, .x_in(x_fwd),
    .cfg_we   (cfg_we && cfg_idx >= 8'(2*TAPS)),
    .cfg_idx  (cfg_idx - 8'(2*TAPS)),
    .cfg_entry, .cfg_data,
    .x_q(), .y(y_fb), .y_valid(v_fb)
  );

  assign y       = iir ? y_fwd + y_fb : y_fwd;
  assign y_valid = v_fwd;

  // Both filters see the same strobe, so their outputs are aligned.
  assert property (@(posedge clk) disable iff (!rst_n) v_fwd == v_fb)
    else $error("pda_filter: forward and feed-backward outputs out of step");
endmodule

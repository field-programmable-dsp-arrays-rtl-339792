// complex_mult -- three-multiplier complex multiplier for the FFT butterfly.
//
// (a + jb)(cos + j sin) is formed as
//   R = (cos - sin) b + cos (a - b)
//   I = (cos + sin) a - cos (a - b)
// with three multipliers, one adder and two subtractors (a - b and the
// imaginary output), at the cost of storing cos-sin and cos+sin next to cos
// in the twiddle table. This follows the paper. Twiddles are Q2.14; each
// result is rounded to nearest (add half, shift) and truncated to W bits,
// which is this design's choice. Purely combinational.
module complex_mult #(
  parameter int unsigned W       = fpda_pkg::FFT_W,
  parameter int unsigned TW_W    = fpda_pkg::TW_W,
  parameter int unsigned TW_FRAC = fpda_pkg::TW_FRAC
) (
  input  logic signed [W-1:0]    a,
  input  logic signed [W-1:0]    b,
  input  logic signed [TW_W-1:0] c,
  input  logic signed [TW_W-1:0] cms,
  input  logic signed [TW_W-1:0] cps,
  output logic signed [W-1:0]    r,
  output logic signed [W-1:0]    i
);
  localparam int unsigned PW = W + TW_W + 2;

  logic signed [W:0]    amb;
  logic signed [PW-1:0] m1, m2, m3, rs, is_;

  assign amb = {a[W-1], a} - {b[W-1], b};
  assign m1  = PW'(cms) * PW'(b);
  assign m2  = PW'(c)   * PW'(amb);
  assign m3  = PW'(cps) * PW'(a);
  assign rs  = m1 + m2 + PW'(1 <<< (TW_FRAC-1));
  assign is_ = m3 - m2 + PW'(1 <<< (TW_FRAC-1));
  assign r   = W'(rs >>> TW_FRAC);
  assign i   = W'(is_ >>> TW_FRAC);
endmodule

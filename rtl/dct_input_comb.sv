// dct_input_comb -- input combination block of the 16-point DCT.
//
// The 16-point DCT matrix splits into even and odd rows. For the sample
// quadruple (a, b, c, d) = (x_i, x_15-i, x_7-i, x_8+i), i = 0..3, this block
// forms
//   e = (a + b) + (c + d)   input of the even-even 4x4 product (Y0 Y4 Y8 Y12)
//   f = (a + b) - (c + d)   input of the even-odd 4x4 product (Y2 Y6 Y10 Y14)
//   g = a - b,  h = c - d   inputs of the odd 8x4 products (Y1 Y3 .. Y15)
// with three adders and three subtractors; four such blocks serve the
// transform, as in the paper. Widths grow by one bit per stage. Purely
// combinational.
module dct_input_comb #(
  parameter int unsigned IN_W = fpda_pkg::DATA_W
) (
  input  logic signed [IN_W-1:0] a,
  input  logic signed [IN_W-1:0] b,
  input  logic signed [IN_W-1:0] c,
  input  logic signed [IN_W-1:0] d,
  output logic signed [IN_W+1:0] e,
  output logic signed [IN_W+1:0] f,
  output logic signed [IN_W:0]   g,
  output logic signed [IN_W:0]   h
);
  logic signed [IN_W:0] s_ab, s_cd;

  assign s_ab = (IN_W+1)'(a) + (IN_W+1)'(b);
  assign s_cd = (IN_W+1)'(c) + (IN_W+1)'(d);
  assign e    = (IN_W+2)'(s_ab) + (IN_W+2)'(s_cd);
  assign f    = (IN_W+2)'(s_ab) - (IN_W+2)'(s_cd);
  assign g    = (IN_W+1)'(a) - (IN_W+1)'(b);
  assign h    = (IN_W+1)'(c) - (IN_W+1)'(d);
endmodule

// butterfly -- radix-2 decimation-in-frequency butterfly.
//
// p = a + b and q = (a - b) w, with w applied by the three-multiplier
// complex_mult. With the adder of p and the subtractor of a - b, one
// butterfly has the paper's count of 2 adders, 3 subtractors and 3
// multipliers (complex additions counted once). The paper's butterfly figure
// labels the lower output a - wb, but its text names decimation in
// frequency, which the FFT's stage wiring needs; (a - b) w is used.
// Sums wrap at W bits (no scaling). Purely combinational.
module butterfly #(
  parameter int unsigned W = fpda_pkg::FFT_W
) (
  input  logic signed [W-1:0] a_re,
  input  logic signed [W-1:0] a_im,
  input  logic signed [W-1:0] b_re,
  input  logic signed [W-1:0] b_im,
  input  fpda_pkg::twiddle_t  tw,
  output logic signed [W-1:0] p_re,
  output logic signed [W-1:0] p_im,
  output logic signed [W-1:0] q_re,
  output logic signed [W-1:0] q_im
);
  logic signed [W-1:0] d_re, d_im;

  assign p_re = a_re + b_re;
  assign p_im = a_im + b_im;
  assign d_re = a_re - b_re;
  assign d_im = a_im - b_im;

  complex_mult #(.W(W)) u_cm (
    .a(d_re), .b(d_im), .c(tw.c), .cms(tw.cms), .cps(tw.cps), .r(q_re), .i(q_im)
  );
endmodule

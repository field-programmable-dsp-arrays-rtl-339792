// scaling_accumulator -- bit-serial distributed-arithmetic accumulator.
//
// Replaces a multiply-accumulate: a LUT addressed by bit j of several inputs
// delivers the partial sum of coefficients for that bit, and this unit adds
// it to the previous sum shifted by one place, subtracting instead for the
// two's-complement sign bit. Bits are taken most significant first, so with
// B-bit inputs
//   y = -L(B-1) * 2^(B-1) + sum_{j<B-1} L(j) * 2^j
// is obtained exactly in B cycles: the sign-bit cycle (sign = 1) loads -L,
// each later cycle computes 2*y + L. The adder/subtractor, output register
// and shift feedback follow the paper; the MSB-first order is this design's
// choice.
//
// Interface: en = 1 performs one step on the rising edge; sign marks the
// first (sign-bit) step of a new sum. y is the output register.
module scaling_accumulator #(
  parameter int unsigned IN_W  = fpda_pkg::LUT_W + 1,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    sign,
  input  logic signed [IN_W-1:0]  lut_val,
  output logic signed [ACC_W-1:0] y
);
  logic signed [ACC_W-1:0] ext, shifted;

  assign ext     = ACC_W'(lut_val);
  assign shifted = y <<< 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   y <= '0;
    else if (en)  y <= sign ? -ext : shifted + ext;
  end
endmodule

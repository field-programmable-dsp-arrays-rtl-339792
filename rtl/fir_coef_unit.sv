// fir_coef_unit -- FIR unit for one coefficient: x * c by two nibble LUTs.
//
// The 8-bit two's-complement sample is split into its low nibble x[3:0] and
// its high nibble x[7:4]; each nibble addresses its own 16-entry LUT and one
// adder sums the two LUT words. Loading the low LUT with c*n and the high LUT
// with c*signed(n)*16 (n = 0..15) makes p = c*x: a multiplier-free product,
// all bits of the sample entering in parallel. Two LUTs and one adder per
// coefficient follow the paper; the placement of the x16 and the sign into
// the LUT contents is this design's choice.
//
// Interface: cfg_we[0] writes the low-nibble LUT, cfg_we[1] the high one, at
// entry cfg_entry. p is combinational in x.
module fir_coef_unit #(
  parameter int unsigned W = fpda_pkg::LUT_W
) (
  input  logic                            clk,
  input  logic [fpda_pkg::DATA_W-1:0]     x,
  input  logic [1:0]                      cfg_we,
  input  logic [3:0]                      cfg_entry,
  input  logic [W-1:0]                    cfg_data,
  output logic signed [W-1:0]             p
);
  logic [W-1:0] lo, hi;

  lut16 #(.W(W)) u_lut_lo (.clk, .we(cfg_we[0]), .waddr(cfg_entry), .wdata(cfg_data),
                           .raddr(x[3:0]), .rdata(lo));
  lut16 #(.W(W)) u_lut_hi (.clk, .we(cfg_we[1]), .waddr(cfg_entry), .wdata(cfg_data),
                           .raddr(x[7:4]), .rdata(hi));

  assign p = signed'(lo) + signed'(hi);
endmodule

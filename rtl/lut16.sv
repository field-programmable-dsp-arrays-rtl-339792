// lut16 -- one 2^4-entry look-up table of the FPDA LUT array.
//
// Distributed arithmetic replaces a multiplication by a look-up of a
// precomputed partial product addressed by input bits. This table holds 16
// such words. It is read asynchronously by the 4-bit DA address and written
// synchronously through the configuration port, which is how a new function
// or a new set of coefficients is loaded into the array.
//
// Interface: we/waddr/wdata write one entry on the rising clock edge;
// rdata = mem[raddr] combinationally. The storage has no reset: it is
// meaningful only after configuration. The write port and the word width are
// this design's choices; the paper states only that the values are
// precomputed and stored.
module lut16 #(
  parameter int unsigned W = fpda_pkg::LUT_W
) (
  input  logic         clk,
  input  logic         we,
  input  logic [3:0]   waddr,
  input  logic [W-1:0] wdata,
  input  logic [3:0]   raddr,
  output logic [W-1:0] rdata
);
  logic [W-1:0] mem [16];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule

// mode_decoder -- configuration-mode decoder of the array.
//
// Turns the 3-bit mode code D3..D1 into the one-hot control signals C1..C5
// that select FIR, IIR, DCT, FFT or DWT; only one configuration is active at
// a time. The one-hot patterns are the paper's mode table; the code on
// D3..D1 is this design's choice: 1 FIR, 2 IIR, 3 DCT, 4 FFT, 5 DWT (the
// table's row order), any other code selects nothing.
// Interface: combinational, c[FN_x] is C(x+1).
module mode_decoder (
  input  logic [2:0]      d,
  output fpda_pkg::ctrl_t c
);
  import fpda_pkg::*;

  always_comb begin
    c = '0;
    case (d)
      3'd1: c[FN_FIR] = 1'b1;
      3'd2: c[FN_IIR] = 1'b1;
      3'd3: c[FN_DCT] = 1'b1;
      3'd4: c[FN_FFT] = 1'b1;
      3'd5: c[FN_DWT] = 1'b1;
      default: c = '0;
    endcase
  end
endmodule

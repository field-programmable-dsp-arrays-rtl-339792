// tb_mode_decoder -- all eight codes of D3..D1 against the mode table:
// codes 1..5 give C1..C5 one-hot (FIR, IIR, DCT, FFT, DWT), the others none.
module tb_mode_decoder;
  import fpda_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] d;
  ctrl_t c;

  mode_decoder dut (.d, .c);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Expected {C5,C4,C3,C2,C1} per code.
    logic [4:0] exp_c [8] = '{5'b00000, 5'b00001, 5'b00010, 5'b00100,
                              5'b01000, 5'b10000, 5'b00000, 5'b00000};
    for (int i = 0; i < 8; i++) begin
      d = 3'(i); #1;
      checks++;
      if (c !== exp_c[i]) begin failures++; $display("FAIL d=%0d c=%b", i, c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

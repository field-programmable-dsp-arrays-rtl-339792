// tb_lut16 -- writes random words to every entry of one LUT, then reads all
// 16 addresses back and checks them, including a rewrite of one entry.
module tb_lut16;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        we;
  logic [3:0]  waddr, raddr;
  logic [17:0] wdata, rdata;
  logic [17:0] ref_mem [16];

  lut16 dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int n = 0; n < 16; n++) begin
        @(negedge clk);
        we = 1; waddr = 4'(n); wdata = 18'($urandom); ref_mem[n] = wdata;
      end
      @(negedge clk); we = 0;
      for (int n = 15; n >= 0; n--) begin
        raddr = 4'(n); #1;
        checks++;
        if (rdata !== ref_mem[n]) begin
          failures++; $display("FAIL entry %0d: %h != %h", n, rdata, ref_mem[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// decimator -- filter-and-downsample-by-2 block of the DWT.
//
// A parallel-DA FIR (TAPS taps) filters every input sample. A 1-bit counter
// toggles on every filter output, and a parallel-load register takes the
// filter output only while the counter is 0, so the even-indexed outputs are
// kept and the odd ones are blocked: one sample enters per clock, one
// filtered sample leaves every two clocks. In the paper the counter output
// clocks the register; here it is a load enable on the system clock, which
// keeps the design on one clock.
//
// Interface: in_valid strobes x_in. y_valid pulses with y for filter outputs
// 0, 2, 4, ... counted from reset. The first kept output appears 3 clocks
// after the first sample (2 in the FIR, 1 in the load register). LUT writes
// as in pda_fir.
module decimator #(
  parameter int unsigned TAPS = 8
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  logic [fpda_pkg::DATA_W-1:0]          x_in,
  input  logic                                 cfg_we,
  input  logic [7:0]                           cfg_idx,
  input  logic [3:0]                           cfg_entry,
  input  logic [fpda_pkg::LUT_W-1:0]           cfg_data,
  output logic signed [fpda_pkg::ACC_W-1:0]    y,
  output logic                                 y_valid
);
  import fpda_pkg::*;

  logic signed [ACC_W-1:0] f_y;
  logic                    f_v;
  logic                    phase;  // the 1-bit counter

  pda_fir #(.TAPS(TAPS)) u_fir (
    .clk, .rst_n, .en(in_valid), .x_in,
    .cfg_we, .cfg_idx, .cfg_entry, .cfg_data,
    .x_q(), .y(f_y), .y_valid(f_v)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase   <= 1'b0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= 1'b0;
      if (f_v) begin
        phase <= ~phase;
        if (!phase) begin
          y       <= f_y;
          y_valid <= 1'b1;
        end
      end
    end
  end
endmodule

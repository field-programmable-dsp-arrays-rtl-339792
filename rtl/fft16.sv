// fft16 -- scalable iterative 16-point FFT (radix-2, decimation in frequency).
//
// Sixteen complex registers REG0..REG15 feed eight butterflies: butterfly k
// takes REGk and REG(k+8) and produces Bk = a + b and B(k+8) = (a - b) w.
// The butterflies are reused for all four stages: in front of each register
// a 4:1 mux, selected by the stage number {s1, s0}, takes either the inputs X
// (stage 0) or the butterfly outputs B wired back in the order the next stage
// needs. The register-to-B wiring of each stage is the one printed in the
// paper's FFT figure. Fourteen 2:1 muxes, selected by s2, can put X instead
// of B into the registers of stage 1, 2 or 3; loading X at stage 4-log2n and
// running the remaining stages computes an 8-, 4- or 2-point transform on the
// same hardware (the paper's scalability line s2). The controller that steps
// {s1, s0} and drives s2 is this design's own.
//
// Twiddle of butterfly k at stage s: W16^((k << s) mod 8), from the
// cos / cos-sin / cos+sin table in fpda_pkg.
//
// Interface: start (while not busy) loads x_re/x_im (8-bit, sign-extended to
// W) with log2n in 1..4 points (2..16). One stage runs per clock; done pulses
// 1 + log2n clocks after start, with the results in b_re/b_im, held until the
// next done. Output order (bin held by Bi), for 16 points:
//   B0..B7 = X0 X4 X1 X5 X2 X6 X3 X7,  B8..B15 = X8 X12 X9 X13 X10 X14 X11 X15
// 8 points: B0 B1 B4 B5 = X0 X2 X1 X3, B8 B9 B12 B13 = X4 X6 X5 X7;
// 4 points: B0 B1 B8 B9 = X0 X1 X2 X3; 2 points: B0 B8 = X0 X1.
// No scaling is applied between stages: inputs must leave log2n bits of
// headroom in W.
module fft16 #(
  parameter int unsigned N    = 16,
  parameter int unsigned IN_W = fpda_pkg::DATA_W,
  parameter int unsigned W    = fpda_pkg::FFT_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [2:0]             log2n,
  input  logic signed [IN_W-1:0] x_re [N],
  input  logic signed [IN_W-1:0] x_im [N],
  output logic signed [W-1:0]    b_re [N],
  output logic signed [W-1:0]    b_im [N],
  output logic                   done,
  output logic                   busy
);
  import fpda_pkg::*;

  // B index routed into REGr at stages 1..3 (row 0 unused: stage 0 loads X).
  // The X input of a 2:1 mux carries the same index as its B input.
  localparam int unsigned MAP [4][16] = '{
    '{0, 1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15},
    '{0, 1, 2, 3, 8, 9, 10, 11, 4, 5, 6, 7, 12, 13, 14, 15},
    '{0, 1, 4, 5, 8, 9, 12, 13, 2, 3, 6, 7, 10, 11, 14, 15},
    '{0, 8, 2, 10, 4, 12, 6, 14, 1, 9, 3, 11, 5, 13, 7, 15}
  };
  // Registers that have a 2:1 (X or B) mux at each stage: 8 + 4 + 2 = 14.
  localparam logic [15:0] HAS_X [4] = '{16'hFFFF, 16'h0F0F, 16'h0303, 16'h0101};

  logic signed [W-1:0] r_re [N];
  logic signed [W-1:0] r_im [N];
  logic signed [W-1:0] bo_re [N];
  logic signed [W-1:0] bo_im [N];
  logic [1:0]          stage;  // {s1, s0}
  logic [1:0]          first_stage;

  initial begin
    assert (N == 16) else $error("fft16: the stage wiring is for N = 16");
  end

  // Supported sizes are 2..16 points.
  assert property (@(posedge clk) disable iff (!rst_n) (start && !busy) |-> (log2n inside {[3'd1:3'd4]}))
    else $error("fft16: log2n %0d out of range 1..4", log2n);

  assign first_stage = 2'(3'd4 - log2n);

  for (genvar k = 0; k < N/2; k++) begin : g_bf
    butterfly #(.W(W)) u_bf (
      .a_re(r_re[k]), .a_im(r_im[k]), .b_re(r_re[k+8]), .b_im(r_im[k+8]),
      .tw  (twiddle(3'((k << stage) % 8))),
      .p_re(bo_re[k]), .p_im(bo_im[k]), .q_re(bo_re[k+8]), .q_im(bo_im[k+8])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      for (int r = 0; r < N; r++) begin
        r_re[r] <= '0; r_im[r] <= '0; b_re[r] <= '0; b_im[r] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          // s2 = X: load the inputs at the first stage of this size.
          for (int r = 0; r < N; r++) begin
            if (HAS_X[first_stage][r]) begin
              r_re[r] <= W'(x_re[MAP[first_stage][r]]);
              r_im[r] <= W'(x_im[MAP[first_stage][r]]);
            end else begin
              r_re[r] <= bo_re[MAP[first_stage][r]];
              r_im[r] <= bo_im[MAP[first_stage][r]];
            end
          end
          stage <= first_stage;
          busy  <= 1'b1;
        end
      end else if (stage != 2'd3) begin
        // s2 = B: feed the butterfly outputs to the next stage.
        for (int r = 0; r < N; r++) begin
          r_re[r] <= bo_re[MAP[stage+1][r]];
          r_im[r] <= bo_im[MAP[stage+1][r]];
        end
        stage <= stage + 2'd1;
      end else begin
        for (int r = 0; r < N; r++) begin
          b_re[r] <= bo_re[r];
          b_im[r] <= bo_im[r];
        end
        done <= 1'b1;
        busy <= 1'b0;
      end
    end
  end
endmodule

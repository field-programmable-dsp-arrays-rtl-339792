// pda_fir -- parallel distributed-arithmetic FIR filter.
//
// y[n] = sum_{k=0}^{TAPS-1} c_k x[n-k]. A delay line holds the last TAPS
// samples; each sample feeds its own fir_coef_unit (two nibble LUTs holding
// multiples of c_k) and the TAPS products are reduced by a binary tree of
// two-input adders, as in the paper's 16-tap figure. Because the whole sample
// enters the LUTs in parallel, one output is produced per input sample
// whatever the filter length.
//
// Interface: on a clock with en = 1 the delay line shifts in x_in. One clock
// later y holds the filter output for that sample and y_valid pulses
// (latency 2 clocks from x_in to y, throughput one sample per clock).
// x_q is the newest stored sample, used to chain a second filter.
// LUT writes: cfg_idx = 2*k selects the low-nibble LUT of tap k, 2*k+1 the
// high-nibble LUT. The latency, widths and write port are this design's
// choices; the structure follows the paper.
module pda_fir #(
  parameter int unsigned TAPS  = 16,
  parameter int unsigned LUT_W = fpda_pkg::LUT_W,
  parameter int unsigned ACC_W = fpda_pkg::ACC_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  logic [fpda_pkg::DATA_W-1:0]  x_in,
  input  logic                         cfg_we,
  input  logic [7:0]                   cfg_idx,
  input  logic [3:0]                   cfg_entry,
  input  logic [LUT_W-1:0]             cfg_data,
  output logic [fpda_pkg::DATA_W-1:0]  x_q,
  output logic signed [ACC_W-1:0]      y,
  output logic                         y_valid
);
  import fpda_pkg::*;

  // Adder tree size: next power of two of TAPS leaves.
  localparam int unsigned LEVELS = (TAPS <= 1) ? 1 : $clog2(TAPS);
  localparam int unsigned LEAVES = 1 << LEVELS;

  logic [DATA_W-1:0]       dl [TAPS];
  logic signed [LUT_W-1:0] prod [TAPS];
  logic signed [ACC_W-1:0] tree [2*LEAVES-1];
  logic                    en_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) dl[k] <= '0;
    end else if (en) begin
      dl[0] <= x_in;
      for (int k = 1; k < TAPS; k++) dl[k] <= dl[k-1];
    end
  end

  for (genvar k = 0; k < TAPS; k++) begin : g_tap
    fir_coef_unit #(.W(LUT_W)) u_unit (
      .clk,
      .x        (dl[k]),
      .cfg_we   ({cfg_we && cfg_idx == 8'(2*k+1), cfg_we && cfg_idx == 8'(2*k)}),
      .cfg_entry,
      .cfg_data,
      .p        (prod[k])
    );
  end

  // Binary adder tree: node i has children 2i+1 and 2i+2; leaves start at
  // LEAVES-1. Unused leaves are zero.
  for (genvar l = 0; l < LEAVES; l++) begin : g_leaf
    if (l < TAPS) begin : g_used
      assign tree[LEAVES-1+l] = ACC_W'(prod[l]);
    end else begin : g_pad
      assign tree[LEAVES-1+l] = '0;
    end
  end
  for (genvar n = 0; n < LEAVES-1; n++) begin : g_node
    assign tree[n] = tree[2*n+1] + tree[2*n+2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q    <= 1'b0;
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      en_q    <= en;
      y_valid <= en_q;
      if (en_q) y <= tree[0];
    end
  end

  assign x_q = dl[0];
endmodule

// dct16 -- 16-point 1-D DCT by bit-serial distributed arithmetic.
//
// Four input combination blocks fold the 16 samples into three 4-element
// vectors per quadruple: e (even-even), f (even-odd) and g, h (odd). The
// products with the decomposed 4x4 coefficient matrices are computed by DA:
// 24 LUTs, each addressed by bit j of the four elements of one vector, hold
// every subset sum of one matrix row. LUT0..3 (rows of Y0 Y4 Y8 Y12, on e)
// and LUT4..7 (Y2 Y6 Y10 Y14, on f) feed one scaling accumulator each; each
// odd output Y(2q+1) adds LUT(8+q), on g = (x0-x15 .. x3-x12), and LUT(16+q),
// on (x4-x11, x5-x10, x6-x9, x7-x8) = (h3, h2, h1, h0), before its
// accumulator. This structure is the paper's. The coefficients are LUT
// contents, so any scaling (e.g. the 2/N and C_k of the DCT definition) is
// the loader's choice.
//
// LUT addressing: address bit i is bit j of vector element i. LUT word for
// row coefficients (k0..k3) at address m: sum over set bits i of m of k_i.
//
// Interface: start (while not busy) captures x[0..15]. The folded values are
// B = 10 bits wide; they are processed MSB (sign) first, one bit per clock,
// so done pulses B + 1 clocks after start with y[0..15] = Y0..Y15 valid for
// that clock and held until the next start. One transform per B + 1 clocks.
module dct16 #(
  parameter int unsigned N     = 16,
  parameter int unsigned B     = fpda_pkg::DATA_W + 2,
  parameter int unsigned ACC_W = 32
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic signed [fpda_pkg::DATA_W-1:0]   x [N],
  input  logic                                 cfg_we,
  input  logic [7:0]                           cfg_idx,
  input  logic [3:0]                           cfg_entry,
  input  logic [fpda_pkg::LUT_W-1:0]           cfg_data,
  output logic signed [ACC_W-1:0]              y [N],
  output logic                                 done,
  output logic                                 busy
);
  import fpda_pkg::*;

  localparam int unsigned DW = DATA_W;
  localparam int unsigned BC = $clog2(B);

  // Folded inputs, all held at B bits.
  logic signed [B-1:0] ve [4], vf [4], vg [4], vh [4];
  logic signed [DW+1:0] ce [4], cf [4];
  logic signed [DW:0]   cg [4], ch [4];
  logic [BC-1:0]        bitj;
  logic                 first;

  for (genvar i = 0; i < 4; i++) begin : g_comb
    dct_input_comb #(.IN_W(DW)) u_comb (
      .a(x[i]), .b(x[15-i]), .c(x[7-i]), .d(x[8+i]),
      .e(ce[i]), .f(cf[i]), .g(cg[i]), .h(ch[i])
    );
  end

  // DA addresses: bit j of each vector's four elements.
  logic [3:0] addr_e, addr_f, addr_g, addr_h;
  for (genvar i = 0; i < 4; i++) begin : g_addr
    assign addr_e[i] = ve[i][bitj];
    assign addr_f[i] = vf[i][bitj];
    assign addr_g[i] = vg[i][bitj];
    assign addr_h[i] = vh[3-i][bitj];  // element i is x(4+i) - x(11-i) = h(3-i)
  end

  logic [LUT_W-1:0] lut_q [24];
  for (genvar t = 0; t < 24; t++) begin : g_lut
    logic [3:0] ra;
    if (t < 4)       begin : g_ee assign ra = addr_e; end
    else if (t < 8)  begin : g_eo assign ra = addr_f; end
    else if (t < 16) begin : g_o1 assign ra = addr_g; end
    else             begin : g_o2 assign ra = addr_h; end
    lut16 #(.W(LUT_W)) u_lut (
      .clk, .we(cfg_we && cfg_idx == 8'(t)), .waddr(cfg_entry), .wdata(cfg_data),
      .raddr(ra), .rdata(lut_q[t])
    );
  end

  // Accumulator a -> output: a = 0..3 -> Y0,4,8,12; 4..7 -> Y2,6,10,14;
  // 8..15 -> Y1,3,..,15.
  for (genvar a = 0; a < 16; a++) begin : g_acc
    localparam int unsigned YI = (a < 4) ? 4*a : (a < 8) ? 4*(a-4) + 2 : 2*(a-8) + 1;
    logic signed [LUT_W:0] v;
    if (a < 8) begin : g_even
      assign v = (LUT_W+1)'(signed'(lut_q[a]));
    end else begin : g_odd
      assign v = (LUT_W+1)'(signed'(lut_q[a])) + (LUT_W+1)'(signed'(lut_q[a+8]));
    end
    scaling_accumulator #(.IN_W(LUT_W+1), .ACC_W(ACC_W)) u_sacc (
      .clk, .rst_n, .en(busy), .sign(first), .lut_val(v), .y(y[YI])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      first <= 1'b0;
      bitj  <= '0;
      for (int i = 0; i < 4; i++) begin
        ve[i] <= '0; vf[i] <= '0; vg[i] <= '0; vh[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          for (int i = 0; i < 4; i++) begin
            ve[i] <= B'(ce[i]); vf[i] <= B'(cf[i]);
            vg[i] <= B'(cg[i]); vh[i] <= B'(ch[i]);
          end
          bitj  <= BC'(B-1);
          first <= 1'b1;
          busy  <= 1'b1;
        end
      end else begin
        first <= 1'b0;
        if (bitj == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          bitj <= bitj - 1'b1;
        end
      end
    end
  end

  initial begin
    assert (N == 16) else $error("dct16: the decomposition is for N = 16");
    assert (B >= DATA_W + 2) else $error("dct16: B must hold the folded inputs");
  end
endmodule

// bicu: Bilinear Interpolation Computation Unit (SIMD over the FP32 lanes of
// one 256-bit burst).
//
// Stage 0 is the fraction extractor: with fx, fy the FRAC-bit fractions of the
// sampling position, a subtractor forms 1-f as 2^FRAC - f and four integer
// products give the weights (1-fx)(1-fy), fx(1-fy), (1-fx)fy and fx*fy of the
// TL, TR, BL and BR neighbours; neighbours outside the tile (nvalid low) get
// weight 0. The integer weights (at most 2^(2*FRAC), exact in FP32) are
// converted to FP32 and scaled by 2^(-2*FRAC). Then every lane multiplies the
// four neighbour values by their weights (FP32 multipliers, 4 cycles) and a
// two-level binary adder tree adds them ((TL+TR)+(BL+BR), 3 + 3 cycles).
//
// Timing: out_valid follows in_valid by 1 + 4 + 3 + 3 = 11 cycles; one burst
// may enter per cycle. The structure (fraction extractor, multiplier, adder
// tree) and the unit latencies follow the paper; the fixed-point fraction and
// the weight formula written out here are this design's reading of it.
module bicu
  import danmp_pkg::*;
#(
  parameter int FRAC_BITS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [FRAC_BITS-1:0]     fx,
  input  logic [FRAC_BITS-1:0]     fy,
  input  logic [3:0]               nvalid,
  input  logic [3:0][LANES-1:0][31:0] f,
  output logic                     out_valid,
  output logic [LANES-1:0][31:0]   out
);
  localparam int WW = 2 * FRAC_BITS + 1;

  logic [FRAC_BITS:0]  ox, oy, ex, ey;       // 1-f and f, FRAC_BITS+1 bits
  logic [3:0][WW-1:0]  wi;
  logic                s0_valid;
  logic [3:0][LANES-1:0][31:0] s0_w, s0_f;
  logic [3:0]          m_valid;
  logic [3:0][LANES-1:0][31:0] m_out;
  logic [1:0]          a_valid;
  logic [1:0][LANES-1:0][31:0] a_out;

  always_comb begin
    ex = {1'b0, fx};
    ey = {1'b0, fy};
    ox = (FRAC_BITS+1)'(1 << FRAC_BITS) - ex;   // subtractor
    oy = (FRAC_BITS+1)'(1 << FRAC_BITS) - ey;
    wi[0] = nvalid[0] ? WW'(ox * oy) : '0;
    wi[1] = nvalid[1] ? WW'(ex * oy) : '0;
    wi[2] = nvalid[2] ? WW'(ox * ey) : '0;
    wi[3] = nvalid[3] ? WW'(ex * ey) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s0_valid <= 1'b0;
    else        s0_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < 4; k++) begin
      for (int l = 0; l < LANES; l++) s0_w[k][l] <= fp_from_uint(24'(wi[k]), 2 * FRAC_BITS);
      s0_f[k] <= f[k];
    end
  end

  for (genvar k = 0; k < 4; k++) begin : g_mul
    fp32_mul #(.LAT(4), .LANES(LANES)) u_mul (
      .clk, .rst_n, .in_valid(s0_valid), .a(s0_f[k]), .b(s0_w[k]),
      .out_valid(m_valid[k]), .y(m_out[k]));
  end

  fp32_add #(.LAT(3), .LANES(LANES)) u_add_top (
    .clk, .rst_n, .in_valid(m_valid[0]), .a(m_out[0]), .b(m_out[1]),
    .out_valid(a_valid[0]), .y(a_out[0]));
  fp32_add #(.LAT(3), .LANES(LANES)) u_add_bot (
    .clk, .rst_n, .in_valid(m_valid[2]), .a(m_out[2]), .b(m_out[3]),
    .out_valid(a_valid[1]), .y(a_out[1]));
  fp32_add #(.LAT(3), .LANES(LANES)) u_add_root (
    .clk, .rst_n, .in_valid(a_valid[0]), .a(a_out[0]), .b(a_out[1]),
    .out_valid(out_valid), .y(out));
endmodule

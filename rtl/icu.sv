// icu: Index Computation Unit of a near-bank or near-bank-group PE.
//
// From a reference point (px, py) already scaled to the pixel grid of the
// feature tile and a learned offset (dx, dy), it forms the sampling position
// with Adder1 (x = px + dx, y = py + dy), checks the four bilinear neighbours
// against the tile with comparators, and generates their pixel indices with a
// multiplier and Adder2 (index = y * w + x). The order Adder1, comparator,
// multiplier, Adder2 is the paper's; the number formats are this design's.
//
// Coordinates are signed fixed point with FRAC fraction bits. The integer part
// (x0, y0) is the top-left neighbour; the fractions fx, fy go to the BICU.
// nvalid[0..3] flags TL (x0,y0), TR (x0+1,y0), BL (x0,y0+1), BR (x0+1,y0+1) as
// inside the w x h tile; an outside neighbour gets the index of the clamped
// position so that its read stays in the tile, and the BICU gives it weight 0
// (zero padding). Purely combinational; the PE registers the outputs.
module icu #(
  parameter int FRAC = 8
) (
  input  logic signed [31:0] px,
  input  logic signed [31:0] py,
  input  logic signed [31:0] dx,
  input  logic signed [31:0] dy,
  input  logic        [15:0] w,
  input  logic        [15:0] h,
  output logic   [FRAC-1:0]  fx,
  output logic   [FRAC-1:0]  fy,
  output logic        [3:0]  nvalid,
  output logic [3:0][31:0]   idx
);
  logic signed [31:0] x, y, x0, y0, x1, y1;
  logic signed [31:0] cx0, cx1, cy0, cy1;
  logic vx0, vx1, vy0, vy1;

  function automatic logic signed [31:0] clamp(logic signed [31:0] v, logic [15:0] lim);
    if (v < 0) return 0;
    if (v >= $signed({16'd0, lim})) return $signed({16'd0, lim}) - 1;
    return v;
  endfunction

  always_comb begin
    // Adder1: coordinate sampler
    x  = px + dx;
    y  = py + dy;
    x0 = x >>> FRAC;
    y0 = y >>> FRAC;
    x1 = x0 + 1;
    y1 = y0 + 1;
    fx = x[FRAC-1:0];
    fy = y[FRAC-1:0];
    // comparator-based boundary check
    vx0 = (x0 >= 0) && (x0 < $signed({16'd0, w}));
    vx1 = (x1 >= 0) && (x1 < $signed({16'd0, w}));
    vy0 = (y0 >= 0) && (y0 < $signed({16'd0, h}));
    vy1 = (y1 >= 0) && (y1 < $signed({16'd0, h}));
    nvalid = {vx1 & vy1, vx0 & vy1, vx1 & vy0, vx0 & vy0};
    // index generator: multiplier + Adder2
    cx0 = clamp(x0, w);
    cx1 = clamp(x1, w);
    cy0 = clamp(y0, h);
    cy1 = clamp(y1, h);
    idx[0] = 32'(cy0 * $signed({16'd0, w}) + cx0);
    idx[1] = 32'(cy0 * $signed({16'd0, w}) + cx1);
    idx[2] = 32'(cy1 * $signed({16'd0, w}) + cx0);
    idx[3] = 32'(cy1 * $signed({16'd0, w}) + cx1);
  end
endmodule

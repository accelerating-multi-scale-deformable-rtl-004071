// mac_unit: SIMD multiply-accumulate unit of a PE.
//
// Every lane computes out = (accumulate ? acc : 0) + w * x, with x one
// interpolated burst, w the scalar FP32 weight of the instruction (W_value,
// e.g. an attention probability) and acc the current partial sum of the
// instruction's PsumTag, read from the O-Register file. The product takes the
// 4-cycle FP32 multiplier and the sum the 3-cycle FP32 adder; acc and the
// accumulate flag are carried alongside the product, so out_valid follows
// in_valid by 7 cycles and one burst may enter per cycle. The paper leaves the
// MAC internals to conventional designs; this multiply-then-add form is the
// simplest that does the job.
module mac_unit
  import danmp_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [LANES-1:0][31:0] x,
  input  logic [31:0]            w,
  input  logic [LANES-1:0][31:0] acc,
  input  logic                   accumulate,
  output logic                   out_valid,
  output logic [LANES-1:0][31:0] out
);
  localparam int MLAT = 4;
  logic [LANES-1:0][31:0] wv, prod;
  logic [LANES-1:0][31:0] acc_d [MLAT];
  logic                   p_valid;

  always_comb for (int l = 0; l < LANES; l++) wv[l] = w;

  fp32_mul #(.LAT(MLAT), .LANES(LANES)) u_mul (
    .clk, .rst_n, .in_valid, .a(x), .b(wv), .out_valid(p_valid), .y(prod));

  always_ff @(posedge clk) begin
    acc_d[0] <= accumulate ? acc : '0;
    for (int s = 1; s < MLAT; s++) acc_d[s] <= acc_d[s-1];
  end

  fp32_add #(.LAT(3), .LANES(LANES)) u_add (
    .clk, .rst_n, .in_valid(p_valid), .a(prod), .b(acc_d[MLAT-1]),
    .out_valid, .y(out));
endmodule

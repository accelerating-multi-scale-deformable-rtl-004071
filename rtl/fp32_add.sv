// fp32_add: lane-parallel IEEE-754 single-precision adder with a fixed
// pipeline latency of LAT cycles (3 by default, the FP32 adder latency used
// for the near-memory PEs).
//
// Each lane computes a + b with round-to-nearest-even (danmp_pkg::fp_add,
// subnormals flushed to zero); the result and in_valid then pass through LAT
// register stages, so out_valid/y appear exactly LAT cycles after in_valid.
// A new operand pair may be applied every cycle. The latency follows the
// paper; the retiming of the logic into stages is left to synthesis.
module fp32_add
#(
  parameter int LAT   = 3,
  parameter int LANES = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic [LANES-1:0][31:0] a,
  input  logic [LANES-1:0][31:0] b,
  output logic                   out_valid,
  output logic [LANES-1:0][31:0] y
);
  logic [LANES-1:0][31:0] r [LAT];
  logic [LAT-1:0]         v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[LAT-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) r[0][l] <= danmp_pkg::fp_add(a[l], b[l]);
    for (int s = 1; s < LAT; s++) r[s] <= r[s-1];
  end

  assign out_valid = v[LAT-1];
  assign y         = r[LAT-1];
endmodule

// tb_fp32_mul: self-checking test of the pipelined FP32 multiplier.
// Random operands (moderate exponent range, both signs, plus zeros and
// cancellation cases) are applied one per cycle; every result must equal the
// single-precision rounding of the exact product, computed with the simulator's
// real arithmetic, and must appear exactly 4 cycles after its operands.
module tb_fp32_mul;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic in_valid = 0, out_valid;
  logic [0:0][31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_mul #(.LAT(4)) dut (.*);

  function automatic logic [31:0] rnd_fp();
    logic [31:0] r;
    r = $urandom;
    r[30:23] = 8'(100 + ($urandom % 50));
    return r;
  endfunction

  logic [31:0] qa[$], qb[$];
  int          qt[$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid) begin
    logic [31:0] ea, eb, exp_y;
    int t;
    ea = qa.pop_front(); eb = qb.pop_front(); t = qt.pop_front();
    exp_y = to_fp32(to_real(ea) * to_real(eb));
    if (exp_y[30:0] == 0 && y[0][30:0] == 0) exp_y = y[0];   // signed-zero convention
    checks++;
    if (y[0] !== exp_y || cyc - t != 4) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h exp %h lat %0d", ea, eb, y[0], exp_y, cyc - t);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = 1;
      a[0] = rnd_fp(); b[0] = rnd_fp();
      if (i % 7 == 0) b[0] = {~a[0][31], a[0][30:0]};                  // exact cancellation
      if (i % 11 == 0) b[0] = {~a[0][31], a[0][30:1], ~a[0][0]};       // near cancellation
      if (i % 13 == 0) a[0] = 32'd0;
      qa.push_back(a[0]); qb.push_back(b[0]); qt.push_back(cyc);
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

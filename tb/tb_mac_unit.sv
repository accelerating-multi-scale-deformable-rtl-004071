// tb_mac_unit: self-checking test of the SIMD MAC. For random x, w and acc it
// expects round(acc + round(w * x)) bit-exactly (or round(w * x) when
// accumulate is low), 7 cycles after the input.
module tb_mac_unit;
  import danmp_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic in_valid = 0, accumulate = 0, out_valid;
  logic [LANES-1:0][31:0] x, acc, out;
  logic [31:0] w;
  int checks = 0, failures = 0, cyc = 0;
  logic [LANES-1:0][31:0] exp_q[$];
  int t_q[$];

  mac_unit dut (.*);
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid) begin
    logic [LANES-1:0][31:0] e;
    int t;
    e = exp_q.pop_front(); t = t_q.pop_front();
    checks++;
    if (cyc - t != 7) begin failures++; $display("FAIL latency %0d", cyc - t); end
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (out[l] != e[l] && !(out[l][30:0] == 0 && e[l][30:0] == 0)) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d %h exp %h", l, out[l], e[l]);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      logic [LANES-1:0][31:0] e;
      @(negedge clk);
      in_valid   = ($urandom % 3) != 0;
      accumulate = ($urandom % 4) != 0;
      w = to_fp32(real'(int'($urandom % 1001)) / 1000.0);
      for (int l = 0; l < LANES; l++) begin
        x[l]   = to_fp32(real'(int'($urandom % 20001) - 10000) / 777.0);
        acc[l] = to_fp32(real'(int'($urandom % 20001) - 10000) / 333.0);
        e[l]   = to_fp32(to_real(to_fp32(to_real(w) * to_real(x[l]))) + (accumulate ? to_real(acc[l]) : 0.0));
      end
      if (in_valid) begin exp_q.push_back(e); t_q.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_bicu: self-checking test of the bilinear interpolation unit. Random
// fractions, neighbour masks and neighbour values go in one per cycle; every
// output lane is compared with the real-number bilinear sum and must come
// exactly 11 cycles after its input (1 weight stage + 4 multiply + 3 + 3 add).
module tb_bicu;
  import danmp_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic in_valid = 0, out_valid;
  logic [7:0] fx, fy;
  logic [3:0] nvalid;
  logic [3:0][LANES-1:0][31:0] f;
  logic [LANES-1:0][31:0] out;
  int checks = 0, failures = 0, cyc = 0;
  real exp_q[$];
  int  t_q[$];

  bicu #(.FRAC_BITS(8)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (out_valid) begin
    real e[LANES];
    int  t;
    for (int l = 0; l < LANES; l++) e[l] = exp_q.pop_front();
    t = t_q.pop_front();
    checks++;
    if (cyc - t != 11) begin failures++; $display("FAIL latency %0d", cyc - t); end
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (!close(to_real(out[l]), e[l], 1e-6, 1e-6)) begin
        failures++;
        if (failures < 10) $display("FAIL lane %0d got %f exp %f", l, to_real(out[l]), e[l]);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      real e[LANES];
      real wt[4];
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      fx = 8'($urandom); fy = 8'($urandom);
      if (i % 9 == 0) fx = 0;
      nvalid = (i % 3 == 0) ? 4'($urandom) : 4'hf;
      wt[0] = (1.0 - fx / 256.0) * (1.0 - fy / 256.0);
      wt[1] = (fx / 256.0) * (1.0 - fy / 256.0);
      wt[2] = (1.0 - fx / 256.0) * (fy / 256.0);
      wt[3] = (fx / 256.0) * (fy / 256.0);
      for (int l = 0; l < LANES; l++) begin
        e[l] = 0.0;
        for (int k = 0; k < 4; k++) begin
          f[k][l] = to_fp32(real'(int'($urandom % 2001) - 1000) / 64.0);
          if (nvalid[k]) e[l] += wt[k] * to_real(f[k][l]);
        end
      end
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) exp_q.push_back(e[l]);
        t_q.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
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

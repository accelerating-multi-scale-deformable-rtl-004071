// tb_bg_nmp: self-checking test of a BG-NMP with its four behavioural banks.
// Each round places one sampling point in every bank: banks 0 and 2 are
// served by their Bank-NMPs, bank 1 by a bank-level instruction that the BG
// redirects to its own PE (no PE in bank 1), bank 3 by a BG-level instruction.
// All accumulate into one tag; a BG Sum must then equal the real-number sum
// of the four weighted interpolations, and a Mean that sum times W_value.
// Instructions are pushed back to back so that the queue fills and stalls;
// the test counts stalls, redirects and both reductions and fails if one of
// them never happened.
module tb_bg_nmp;
  import danmp_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic inst_valid = 0, inst_ready, idle;
  nmp_inst_t inst;
  dram_cmd_t dram_cmd [4];
  logic dram_rd_valid [4];
  logic [LANES-1:0][31:0] dram_rd_data [4];
  logic [LANES-1:0][31:0] psum_rd_data;
  logic [3:0] psum_rd_tag = 0;
  logic [2:0] psum_rd_burst = 0;
  logic wr_en = 0;
  int wr_sel = 0, wr_addr = 0;
  logic [LANES-1:0][31:0] wr_data = '0;
  int errors[4], n_act[4], n_rd[4], n_pre[4];
  int checks = 0, failures = 0, stalls = 0, redirects = 0, sums = 0, means = 0;
  real ref_ps[8][LANES];

  bg_nmp dut (.*);
  for (genvar k = 0; k < 4; k++) begin : g_bk
    dram_bank_model #(.ID(10 + k)) u_bank (.clk, .cmd(dram_cmd[k]), .rd_valid(dram_rd_valid[k]),
      .rd_data(dram_rd_data[k]), .wr_en, .wr_sel, .wr_addr, .wr_data, .errors(errors[k]),
      .n_act(n_act[k]), .n_rd(n_rd[k]), .n_pre(n_pre[k]));
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask
  task automatic wr(int id, int a, logic [DW-1:0] d);
    @(negedge clk); wr_en = 1; wr_sel = id; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask
  task automatic send(nmp_inst_t i);
    @(negedge clk); inst_valid = 1; inst = i;
    @(posedge clk);
    while (!inst_ready) begin stalls++; @(posedge clk); end
    @(negedge clk); inst_valid = 0;
  endtask
  task automatic wait_idle();
    @(posedge clk); @(posedge clk);
    while (!idle) @(posedge clk);
  endtask
  task automatic check_out(int tag, int nb, real scale);
    for (int b = 0; b < nb; b++) begin
      @(negedge clk); psum_rd_tag = 4'(tag); psum_rd_burst = 3'(b); #1;
      for (int l = 0; l < LANES; l++)
        chk(close(to_real(psum_rd_data[l]), scale * ref_ps[b][l], 1e-5, 1e-5),
            $sformatf("burst %0d lane %0d got %f exp %f", b, l, to_real(psum_rd_data[l]), scale * ref_ps[b][l]));
    end
  endtask

  initial begin
    int px[4], py[4], dx[4], dy[4], w, h, vs, nb, tag;
    real wt[4];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      vs = round % 4; nb = vs + 1; tag = 2 + round; w = 7; h = 5;
      for (int b = 0; b < 8; b++) for (int l = 0; l < LANES; l++) ref_ps[b][l] = 0.0;
      for (int k = 0; k < 4; k++) begin
        px[k] = $urandom % (w * 256); py[k] = $urandom % (h * 256);
        dx[k] = int'($urandom % 512) - 256; dy[k] = int'($urandom % 512) - 256;
        wt[k] = real'(1 + $urandom % 8) / 16.0;
        wr(10 + k, 900, mk_rec(px[k], py[k], dx[k], dy[k], w, h, 0));
        for (int b = 0; b < nb; b++) for (int l = 0; l < LANES; l++)
          ref_ps[b][l] += wt[k] * bi_ref(10 + k, px[k], py[k], dx[k], dy[k], w, h, 0, nb, b, l);
      end
      // clear, then index + weighted sum in every bank, back to back
      for (int k = 0; k < 4; k++)
        send(mk_inst(k == 3 ? SE_BG : SE_BANK, OP_CLR, mk_daddr(0, 0, k, 0), 0, 32'd0, tag));
      for (int k = 0; k < 4; k++) begin
        nmp_se_e se;
        se = (k == 3) ? SE_BG : SE_BANK;
        if (k == 1) redirects++;
        send(mk_inst(se, OP_INDEX, mk_daddr(0, 0, k, 900), 0, 32'd0, 0));
        send(mk_inst(se, OP_WSUM, mk_daddr(0, 0, k, 0), vs, to_fp32(wt[k]), tag));
      end
      send(mk_inst(SE_BG, OP_SUM, mk_daddr(0, 0, 0, 0), vs, 32'd0, tag));
      sums++;
      wait_idle();
      check_out(tag, nb, 1.0);
      send(mk_inst(SE_BG, OP_MEAN, mk_daddr(0, 0, 0, 0), vs, to_fp32(0.25), tag));
      means++;
      wait_idle();
      check_out(tag, nb, 0.25);
    end
    for (int k = 0; k < 4; k++) chk(errors[k] == 0, "bank protocol errors");
    for (int k = 0; k < 4; k++) chk(n_rd[k] > 0, $sformatf("bank %0d never read", k));
    $display("mechanisms: stalls=%0d redirects=%0d sums=%0d means=%0d", stalls, redirects, sums, means);
    chk(stalls > 0, "no stall happened");
    chk(redirects > 0 && sums > 0 && means > 0, "mechanism missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_danmp_dimm: end-to-end test of a reduced DANMP DIMM (2 ranks x 2
// bank-groups x 4 banks; NBG = 8 runs the same program on the full DIMM but
// takes a long C++ build) on a multi-scale deformable attention query, with a
// behavioural model behind every bank.
//
// Two queries run at once, one per rank. Each has NH heads (one PsumTag per
// head, 32-element vectors = 4 bursts), NL feature levels and NP sampling
// points per level. Every level is a tile stored in each bank; every sampling
// point is placed in a bank chosen by its head and index, so hot points land
// in banks with a PE and cold points in banks without one (executed by the
// bank-group PE). The host program per rank: clear all partial sums; for each
// point Index + WSum with its attention weight; Sum in every bank-group; Sum
// (head 0) or Mean (head 1, scale 1/2) at the rank; Read of every head.
// The results are compared lane by lane with a real-number model of the same
// sum of weighted bilinear samples. A DRAM-mode instruction is slipped in.
// The test counts host stalls, DRAM-mode hand-offs, cold-bank redirects, row
// misses (PRE commands), results from each rank, cycles in which both ranks
// had a result waiting, and rank Mean operations; each must occur at least once.
module tb_danmp_dimm;
  import danmp_pkg::*;
  import tb_fp_pkg::*;
  localparam int NRANK = 2, NBG = 2, NBANK = 4;
  localparam int NH = 2, NL = 2, NP = 3, VS = 3, NB = VS + 1;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic inst_valid = 0, inst_ready, dram_mode_valid, out_valid, out_ready = 1, idle;
  nmp_inst_t inst, dram_mode_inst;
  result_t out;
  dram_cmd_t              dram_cmd      [NRANK][NBG][NBANK];
  logic                   dram_rd_valid [NRANK][NBG][NBANK];
  logic [LANES-1:0][31:0] dram_rd_data  [NRANK][NBG][NBANK];
  logic wr_en = 0;
  int wr_sel = 0, wr_addr = 0;
  logic [LANES-1:0][31:0] wr_data = '0;
  int errors[NRANK][NBG][NBANK], n_act[NRANK][NBG][NBANK], n_rd[NRANK][NBG][NBANK], n_pre[NRANK][NBG][NBANK];
  int checks = 0, failures = 0, cyc = 0;
  int stalls = 0, dram_modes = 0, redirects = 0, both_waiting = 0, means = 0, results[NRANK];
  real ref_out[NRANK][NH][NB][LANES];
  bit  got[NRANK][NH][NB];
  logic [31:0] wts[NRANK][NH][NL][NP];   // attention weights (FP32)

  danmp_dimm #(.NBG(NBG)) dut (.*);

  for (genvar r = 0; r < NRANK; r++) begin : g_r
    for (genvar g = 0; g < NBG; g++) begin : g_g
      for (genvar k = 0; k < NBANK; k++) begin : g_k
        dram_bank_model #(.ID(r * 32 + g * 4 + k), .DEPTH(512)) u_bank (.clk, .cmd(dram_cmd[r][g][k]),
          .rd_valid(dram_rd_valid[r][g][k]), .rd_data(dram_rd_data[r][g][k]), .wr_en, .wr_sel,
          .wr_addr, .wr_data, .errors(errors[r][g][k]), .n_act(n_act[r][g][k]), .n_rd(n_rd[r][g][k]),
          .n_pre(n_pre[r][g][k]));
      end
    end
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

  // the host drains results with a random ready so both ranks back up
  always @(negedge clk) out_ready = ($urandom % 3) == 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dram_mode_valid) dram_modes++;
    if (dut.r_out_valid[0] && dut.r_out_valid[1]) both_waiting++;
    if (out_valid && out_ready) begin
      results[out.rank]++;
      got[out.rank][out.tag][out.burst] = 1'b1;
      for (int l = 0; l < LANES; l++)
        chk(close(to_real(out.data[l*32 +: 32]), ref_out[out.rank][out.tag][out.burst][l], 1e-5, 1e-5),
            $sformatf("rank %0d head %0d burst %0d lane %0d got %f exp %f", out.rank, out.tag, out.burst, l,
                      to_real(out.data[l*32 +: 32]), ref_out[out.rank][out.tag][out.burst][l]));
    end
  end

  // where sampling point (head h, level l, point p) of the query in rank r lives
  function automatic int pt_bg(int h, int l, int p);   return (h * 3 + l * 2 + p) % NBG; endfunction
  function automatic int pt_bank(int h, int l, int p); return (h + l * NP + p) % NBANK; endfunction
  function automatic int pt_rec(int h, int l, int p);  return 400 + h * 16 + l * 4 + p; endfunction

  initial begin
    int w[NL], hh[NL], base[NL];
    int px, py, dx, dy, id, bg, bk;
    real a;
    for (int r = 0; r < NRANK; r++) for (int h = 0; h < NH; h++) for (int b = 0; b < NB; b++) begin
      got[r][h][b] = 1'b0;
      for (int l = 0; l < LANES; l++) ref_out[r][h][b][l] = 0.0;
    end
    results[0] = 0; results[1] = 0;
    // two levels of the multi-scale feature map, each stored as a tile
    w[0] = 8; hh[0] = 6; base[0] = 0;
    w[1] = 4; hh[1] = 3; base[1] = 200;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // sampling records and the reference result
    for (int r = 0; r < NRANK; r++) for (int h = 0; h < NH; h++) for (int l = 0; l < NL; l++)
      for (int p = 0; p < NP; p++) begin
        bg = pt_bg(h, l, p); bk = pt_bank(h, l, p); id = r * 32 + bg * 4 + bk;
        px = $urandom % (w[l] * 256); py = $urandom % (hh[l] * 256);
        dx = int'($urandom % 600) - 300; dy = int'($urandom % 600) - 300;
        wr(id, pt_rec(h, l, p), mk_rec(px, py, dx, dy, w[l], hh[l], base[l]));
        a = real'(1 + $urandom % 15) / 32.0;
        for (int b = 0; b < NB; b++) for (int ln = 0; ln < LANES; ln++)
          ref_out[r][h][b][ln] += a * bi_ref(id, px, py, dx, dy, w[l], hh[l], base[l], NB, b, ln)
                                  * ((h == 1) ? 0.5 : 1.0);
        wts[r][h][l][p] = to_fp32(a);
      end
    // host program, both ranks interleaved
    for (int r = 0; r < NRANK; r++) for (int h = 0; h < NH; h++) begin
      for (int g = 0; g < NBG; g++) begin
        send(mk_inst(SE_BANK, OP_CLR, mk_daddr(r, g, 0, 0), 0, 32'd0, h));
        send(mk_inst(SE_BANK, OP_CLR, mk_daddr(r, g, 2, 0), 0, 32'd0, h));
        send(mk_inst(SE_BG,   OP_CLR, mk_daddr(r, g, 1, 0), 0, 32'd0, h));
      end
      send(mk_inst(SE_RANK, OP_CLR, mk_daddr(r, 0, 0, 0), 0, 32'd0, h));
    end
    for (int h = 0; h < NH; h++) for (int l = 0; l < NL; l++) for (int p = 0; p < NP; p++)
      for (int r = 0; r < NRANK; r++) begin
        bg = pt_bg(h, l, p); bk = pt_bank(h, l, p); id = r * 32 + bg * 4 + bk;
        if (bk == 1 || bk == 3) redirects++;
        send(mk_inst(SE_BANK, OP_INDEX, mk_daddr(r, bg, bk, pt_rec(h, l, p)), 0, 32'd0, 0));
        send(mk_inst(SE_BANK, OP_WSUM, mk_daddr(r, bg, bk, 0), VS, wts[r][h][l][p], h));
        if (h == 0 && l == 1 && p == 0 && r == 0) begin
          nmp_inst_t d;
          d = mk_inst(SE_RANK, OP_NOP, mk_daddr(0, 0, 0, 0), 0, 32'd0, 0);
          d.mode_se = MODE_DRAM;
          send(d);
        end
      end
    for (int h = 0; h < NH; h++) for (int r = 0; r < NRANK; r++) begin
      for (int g = 0; g < NBG; g++) send(mk_inst(SE_BG, OP_SUM, mk_daddr(r, g, 0, 0), VS, 32'd0, h));
      if (h == 1) begin
        send(mk_inst(SE_RANK, OP_MEAN, mk_daddr(r, 0, 0, 0), VS, to_fp32(0.5), h));
        means++;
      end else
        send(mk_inst(SE_RANK, OP_SUM, mk_daddr(r, 0, 0, 0), VS, 32'd0, h));
    end
    // let both ranks finish, then read them back to back so that their
    // output buffers compete for the DIMM interface
    repeat (5) @(posedge clk);
    while (!idle) @(posedge clk);
    for (int h = 0; h < NH; h++) for (int r = 0; r < NRANK; r++)
      send(mk_inst(SE_RANK, OP_READ, mk_daddr(r, 0, 0, 0), VS, 32'd0, h));
    repeat (5) @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int r = 0; r < NRANK; r++) for (int h = 0; h < NH; h++) for (int b = 0; b < NB; b++)
      chk(got[r][h][b], $sformatf("missing result rank %0d head %0d burst %0d", r, h, b));
    begin
      int errs, pres;
      errs = 0; pres = 0;
      for (int r = 0; r < NRANK; r++) for (int g = 0; g < NBG; g++) for (int k = 0; k < NBANK; k++) begin
        errs += errors[r][g][k]; pres += n_pre[r][g][k];
      end
      chk(errs == 0, "bank protocol errors");
      $display("mechanisms: stalls=%0d dram_mode=%0d cold_redirects=%0d row_misses=%0d results_r0=%0d results_r1=%0d both_ranks_waiting=%0d rank_means=%0d cycles=%0d",
               stalls, dram_modes, redirects, pres, results[0], results[1], both_waiting, means, cyc);
      chk(stalls > 0, "no stall");
      chk(dram_modes == 1, "DRAM-mode hand-off");
      chk(redirects > 0, "no cold-bank redirect");
      chk(pres > 0, "no row miss");
      chk(results[0] > 0 && results[1] > 0, "a rank returned nothing");
      chk(both_waiting > 0, "output arbitration never exercised");
      chk(means > 0, "no mean");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

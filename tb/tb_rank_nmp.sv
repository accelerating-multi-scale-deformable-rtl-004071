// tb_rank_nmp: self-checking test of a Rank-NMP (4 bank-groups) against
// behavioural bank-group stand-ins.
//
// Each stand-in accepts forwarded instructions with a random ready, stays
// busy (idle low) for a random 3..22 cycles per instruction and then writes
// a partial-sum value derived from the instruction's W_value into the tag it
// names. The host program mixes BG- and Bank-level instructions for random
// bank-groups with rank Sum, Mean, Clr, Nop and Read instructions. The test
// checks that every bank-group receives exactly its instructions in program
// order, that rank Sum/Mean only combine partial sums once the preceding
// bank-group work is done (the reference is computed in program order), and
// that Read returns the right rank, tag, burst and data. The output is
// drained with a random ready. Counted mechanisms: host stalls, cycles the
// rank waits for busy bank-groups, Sum, Mean, Clr; each must occur.
module tb_rank_nmp;
  import danmp_pkg::*;
  import tb_fp_pkg::*;
  localparam int NBG = 4, VS = 3;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock

  logic inst_valid = 0, inst_ready, idle;
  nmp_inst_t inst;
  logic bg_inst_valid [NBG];
  logic bg_inst_ready [NBG];
  nmp_inst_t bg_inst;
  logic [3:0] bg_psum_tag;
  logic [2:0] bg_psum_burst;
  logic [LANES-1:0][31:0] bg_psum_data [NBG];
  logic bg_idle [NBG];
  logic out_valid, out_ready = 0;
  result_t out;

  rank_nmp #(.NBG(NBG), .RANK_ID(1'b1)) dut (.*);

  int checks = 0, failures = 0, stalls = 0, waits = 0, sums = 0, means = 0, clrs = 0;
  int cyc = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------ bank-group stand-ins ----
  logic [31:0] bpsum [NBG][NTAGS][MAXNB][LANES];
  nmp_inst_t   pend  [NBG][$];
  nmp_inst_t   exp_fwd [NBG][$];
  int          timer [NBG];
  bit          hs [NBG];
  nmp_inst_t   hs_inst;

  function automatic real bg_val(logic [31:0] w, int b, int l);
    return to_real(w) * (b + 1) - l * 0.25;
  endfunction

  for (genvar g = 0; g < NBG; g++) begin : g_bg
    for (genvar l = 0; l < LANES; l++) begin : g_l
      assign bg_psum_data[g][l] = bpsum[g][bg_psum_tag][bg_psum_burst][l];
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    hs_inst = bg_inst;
    for (int g = 0; g < NBG; g++) hs[g] = rst_n && bg_inst_valid[g] && bg_inst_ready[g];
    if (inst_valid && !inst_ready) stalls++;
    if (int'(dut.as) == 1) begin
      bit busy;
      busy = 0;
      for (int g = 0; g < NBG; g++) if (!bg_idle[g]) busy = 1;
      if (busy) waits++;
    end
  end

  always @(negedge clk) begin
    for (int g = 0; g < NBG; g++) begin
      if (hs[g]) begin
        chk(exp_fwd[g].size() > 0 && hs_inst == exp_fwd[g][0], $sformatf("forward order bg%0d", g));
        if (exp_fwd[g].size() > 0) void'(exp_fwd[g].pop_front());
        if (pend[g].size() == 0) timer[g] = 3 + $urandom % 20;
        pend[g].push_back(hs_inst);
        bg_idle[g] = 0;
        hs[g] = 0;
      end else if (pend[g].size() > 0) begin
        if (timer[g] > 0) timer[g]--;
        else begin
          nmp_inst_t i;
          i = pend[g].pop_front();
          for (int b = 0; b <= int'(i.vsize); b++) for (int l = 0; l < LANES; l++)
            bpsum[g][i.psum_tag][b][l] = to_fp32(bg_val(i.w_value, b, l));
          if (pend[g].size() > 0) timer[g] = 3 + $urandom % 20;
          else bg_idle[g] = 1;
        end
      end
      bg_inst_ready[g] = ($urandom % 3) != 0;
    end
    out_ready = ($urandom % 4) != 0;
  end

  // ------------------------------------------------------ reference model ----
  real mbg [NBG][NTAGS][MAXNB][LANES];
  real mr  [NTAGS][MAXNB][LANES];
  int  exp_tag[$], exp_burst[$];
  real exp_v[$];   // LANES entries per expected burst

  task automatic send(nmp_inst_t i);
    inst = i; inst_valid = 1;
    @(posedge clk);
    while (!inst_ready) @(posedge clk);
    #1 inst_valid = 0;
  endtask

  task automatic host(nmp_inst_t i);
    int g = daddr_bg(i.daddr);
    if (i.nmp_se != SE_RANK) begin
      exp_fwd[g].push_back(i);
      for (int b = 0; b <= int'(i.vsize); b++) for (int l = 0; l < LANES; l++)
        mbg[g][i.psum_tag][b][l] = to_real(to_fp32(bg_val(i.w_value, b, l)));
    end else case (i.op)
      OP_SUM, OP_MEAN: begin
        for (int b = 0; b <= int'(i.vsize); b++) for (int l = 0; l < LANES; l++) begin
          real s = mr[i.psum_tag][b][l];
          for (int gg = 0; gg < NBG; gg++) s += mbg[gg][i.psum_tag][b][l];
          if (i.op == OP_MEAN) s *= to_real(i.w_value);
          mr[i.psum_tag][b][l] = s;
        end
        if (i.op == OP_SUM) sums++; else means++;
      end
      OP_CLR: begin
        for (int b = 0; b < MAXNB; b++) for (int l = 0; l < LANES; l++) mr[i.psum_tag][b][l] = 0.0;
        clrs++;
      end
      OP_READ: for (int b = 0; b <= int'(i.vsize); b++) begin
        exp_tag.push_back(int'(i.psum_tag));
        exp_burst.push_back(b);
        for (int l = 0; l < LANES; l++) exp_v.push_back(mr[i.psum_tag][b][l]);
      end
      default: ;
    endcase
    send(i);
  endtask

  // output checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_tag.size() == 0) chk(0, "unexpected result");
    else begin
      int et, eb;
      real ev;
      bit ok;
      et = exp_tag.pop_front();
      eb = exp_burst.pop_front();
      ok = (out.rank == 1'b1) && (int'(out.tag) == et) && (int'(out.burst) == eb);
      for (int l = 0; l < LANES; l++) begin
        ev = exp_v.pop_front();
        if (!close(to_real(out.data[l*32 +: 32]), ev, 1e-5, 1e-4)) ok = 0;
      end
      chk(ok, $sformatf("read tag %0d/%0d burst %0d/%0d", out.tag, et, out.burst, eb));
    end
  end

  initial begin
    int t, n, rv;
    logic [31:0] w;
    nmp_se_e se;
    for (int g = 0; g < NBG; g++) begin
      bg_inst_ready[g] = 1;
      bg_idle[g] = 1;
      for (int t = 0; t < NTAGS; t++) for (int b = 0; b < MAXNB; b++) for (int l = 0; l < LANES; l++) begin
        bpsum[g][t][b][l] = FP_ZERO; mbg[g][t][b][l] = 0.0;
      end
    end
    for (int t = 0; t < NTAGS; t++) for (int b = 0; b < MAXNB; b++) for (int l = 0; l < LANES; l++) mr[t][b][l] = 0.0;
    inst = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      t = $urandom % 4;
      n = 1 + $urandom % 6;
      for (int k = 0; k < n; k++) begin
        rv = $urandom % 64;
        w = to_fp32((rv - 32) / 8.0);
        se = ($urandom % 2) ? SE_BG : SE_BANK;
        host(mk_inst(se, OP_WSUM, mk_daddr(1, $urandom % NBG, $urandom % 4, 0), VS, w, t));
      end
      case ($urandom % 4)
        0: host(mk_inst(SE_RANK, OP_MEAN, mk_daddr(1, 0, 0, 0), VS, to_fp32(0.5), t));
        1: host(mk_inst(SE_RANK, OP_NOP, mk_daddr(1, 0, 0, 0), VS, 32'd0, t));
        default: host(mk_inst(SE_RANK, OP_SUM, mk_daddr(1, 0, 0, 0), VS, 32'd0, t));
      endcase
      host(mk_inst(SE_RANK, OP_READ, mk_daddr(1, 0, 0, 0), VS, 32'd0, t));
      if (round % 7 == 3) host(mk_inst(SE_RANK, OP_CLR, mk_daddr(1, 0, 0, 0), VS, 32'd0, t));
    end
    while (!idle || exp_tag.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
    for (int g = 0; g < NBG; g++) chk(exp_fwd[g].size() == 0, $sformatf("bg%0d missing forwards", g));
    chk(stalls > 0, "no host stall");
    chk(waits > 0, "rank never waited for a busy bank-group");
    chk(sums > 0 && means > 0 && clrs > 0, "Sum/Mean/Clr not all exercised");
    $display("mechanisms: stalls=%0d waits=%0d sums=%0d means=%0d clrs=%0d", stalls, waits, sums, means, clrs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    $display("FAIL watchdog as=%0d idle=%0d exp=%0d bgidle=%0d%0d%0d%0d", int'(dut.as), idle, exp_tag.size(),
             bg_idle[0], bg_idle[1], bg_idle[2], bg_idle[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

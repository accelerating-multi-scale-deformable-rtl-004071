// tb_sampling_pe: self-checking test of the sampling PE, connected to a bank
// command decoder and a behavioural bank.
// Random sampling records (positions inside, on the edge of and outside the
// tile, random vector lengths and tags) are written into the bank; the test
// issues Index then WSum (or Interp) instructions and compares every partial
// sum lane with a real-number bilinear reference. It also checks Clr, that
// each burst costs exactly four bank reads, and that the bank saw no
// protocol error.
module tb_sampling_pe;
  import danmp_pkg::*;
  import tb_fp_pkg::*;
  localparam int ID = 5;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic inst_valid = 0, inst_ready, idle;
  nmp_inst_t inst;
  dram_cmd_t dram_cmd;
  logic dram_rd_valid;
  logic [LANES-1:0][31:0] dram_rd_data, psum_rd_data;
  logic [3:0] psum_rd_tag = 0;
  logic [2:0] psum_rd_burst = 0;
  logic wr_en = 0;
  int wr_addr = 0;
  logic [LANES-1:0][31:0] wr_data = '0;
  int errors, n_act, n_rd, n_pre;
  int checks = 0, failures = 0;
  real ref_ps[16][8][LANES];

  logic req_valid, req_ready, cmd_busy, pe_idle;
  logic [1:0] req_ba;
  logic [31:0] req_addr;
  sampling_pe dut (.clk, .rst_n, .inst_valid, .inst_ready, .inst, .req_valid, .req_ready, .req_ba,
    .req_addr, .rsp_valid(dram_rd_valid), .rsp_data(dram_rd_data), .psum_rd_tag, .psum_rd_burst,
    .psum_rd_data, .idle(pe_idle));
  bank_cmd_decoder u_cmd (.clk, .rst_n, .req_valid, .req_ready, .req_addr, .dram_cmd, .busy(cmd_busy));
  assign idle = pe_idle && !cmd_busy;
  dram_bank_model #(.ID(ID)) u_bank (.clk, .cmd(dram_cmd), .rd_valid(dram_rd_valid), .rd_data(dram_rd_data),
    .wr_en, .wr_sel(ID), .wr_addr, .wr_data, .errors, .n_act, .n_rd, .n_pre);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  task automatic wr(int a, logic [DW-1:0] d);
    @(negedge clk); wr_en = 1; wr_addr = a; wr_data = d;
    @(negedge clk); wr_en = 0;
  endtask

  task automatic send(nmp_inst_t i);
    @(negedge clk); inst_valid = 1; inst = i;
    @(posedge clk); while (!inst_ready) @(posedge clk);
    @(negedge clk); inst_valid = 0;
  endtask

  task automatic wait_idle();
    @(posedge clk); @(posedge clk);
    while (!idle) @(posedge clk);
  endtask

  task automatic check_tag(int tag, int nb);
    for (int b = 0; b < nb; b++) begin
      @(negedge clk); psum_rd_tag = 4'(tag); psum_rd_burst = 3'(b); #1;
      for (int l = 0; l < LANES; l++)
        chk(close(to_real(psum_rd_data[l]), ref_ps[tag][b][l], 1e-5, 1e-5),
            $sformatf("tag %0d burst %0d lane %0d got %f exp %f", tag, b, l, to_real(psum_rd_data[l]), ref_ps[tag][b][l]));
    end
  endtask

  initial begin
    int px, py, dx, dy, w, h, base, nb, vs, tag, rd0;
    real wt;
    logic [31:0] wfp;
    for (int t = 0; t < 16; t++) for (int b = 0; b < 8; b++) for (int l = 0; l < LANES; l++) ref_ps[t][b][l] = 0.0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 12; it++) begin
      w = 2 + $urandom % 7; h = 2 + $urandom % 6; vs = $urandom % 4; nb = vs + 1;
      base = 64 * ($urandom % 4);
      tag = (it < 6) ? 3 : $urandom % 16;
      px = $urandom % (w * 256); py = $urandom % (h * 256);
      dx = int'($urandom % 768) - 384; dy = int'($urandom % 768) - 384;
      if (it == 2) begin px = 0; dx = -100; end            // left edge, partly outside
      if (it == 4) begin px = (w - 1) * 256 + 10; dx = 0; end  // right edge
      wr(800 + it, mk_rec(px, py, dx, dy, w, h, base));
      send(mk_inst(SE_BANK, OP_INDEX, mk_daddr(0, 0, 0, 800 + it), 0, 32'd0, 0));
      wt  = real'(1 + $urandom % 8) / 8.0;
      wfp = to_fp32(wt);
      wait_idle();
      rd0 = n_rd;
      if (it % 4 == 3) begin
        send(mk_inst(SE_BANK, OP_INTERP, mk_daddr(0, 0, 0, 0), vs, wfp, tag));
        for (int b = 0; b < nb; b++) for (int l = 0; l < LANES; l++)
          ref_ps[tag][b][l] = bi_ref(ID, px, py, dx, dy, w, h, base, nb, b, l);
      end else begin
        send(mk_inst(SE_BANK, OP_WSUM, mk_daddr(0, 0, 0, 0), vs, wfp, tag));
        for (int b = 0; b < nb; b++) for (int l = 0; l < LANES; l++)
          ref_ps[tag][b][l] += wt * bi_ref(ID, px, py, dx, dy, w, h, base, nb, b, l);
      end
      wait_idle();
      chk(n_rd - rd0 == 4 * nb, $sformatf("reads per burst: %0d for %0d bursts", n_rd - rd0, nb));
      check_tag(tag, nb);
    end
    send(mk_inst(SE_BANK, OP_CLR, mk_daddr(0, 0, 0, 0), 0, 32'd0, 3));
    wait_idle();
    for (int b = 0; b < 8; b++) for (int l = 0; l < LANES; l++) ref_ps[3][b][l] = 0.0;
    check_tag(3, 8);
    chk(errors == 0, "bank protocol errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

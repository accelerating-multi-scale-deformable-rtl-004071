// tb_bank_cmd_decoder: self-checking test of the bank command generator with
// the default DDR5 timing (tRCD 40, tRP 40, tRAS 76, tRC 116, tCCD 12).
// A request stream with row hits and row misses is pushed; the testbench
// predicts the exact command sequence (ACT, RD..., PRE, ACT, RD...) and the
// cycle of every command from the timing rules, checks the row/column of each
// RD, and checks that the bank model returns the right data in order.
module tb_bank_cmd_decoder;
  import danmp_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic req_valid = 0, req_ready, busy;
  logic [31:0] req_addr;
  dram_cmd_t cmd;
  logic rd_valid;
  logic [LANES-1:0][31:0] rd_data;
  int errors, n_act, n_rd, n_pre;
  int checks = 0, failures = 0, cyc = 0;
  localparam int NREQ = 8;
  int addrs[NREQ] = '{32'h00, 32'h01, 32'h05, 32'h63, 32'h61, 32'h07, 32'h08, 32'h1F};
  dram_op_e ev_op[$];
  int ev_t[$], ev_a[$];
  int rsp_n = 0;

  bank_cmd_decoder dut (.clk, .rst_n, .req_valid, .req_ready, .req_addr, .dram_cmd(cmd), .busy);
  dram_bank_model #(.ID(3)) u_bank (.clk, .cmd, .rd_valid, .rd_data, .wr_en(1'b0), .wr_sel(0),
    .wr_addr(0), .wr_data('0), .errors, .n_act, .n_rd, .n_pre);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cmd.op != CMD_NOP) begin
      ev_op.push_back(cmd.op); ev_t.push_back(cyc); ev_a.push_back((int'(cmd.row) << COLW) | int'(cmd.col));
    end
    if (rd_valid) begin
      for (int l = 0; l < LANES; l++) chk(rd_data[l] == pat(3, addrs[rsp_n], l), "read data");
      rsp_n++;
    end
  end

  initial begin
    int i, t_act, t_pre, t_rd, k, row, cur_row;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (i = 0; i < NREQ; i++) begin
      @(negedge clk);
      req_valid = 1; req_addr = addrs[i];
      @(posedge clk);
      while (!req_ready) @(posedge clk);
    end
    @(negedge clk) req_valid = 0;
    wait (!busy);
    repeat (60) @(posedge clk);
    // predicted schedule
    k = 0; cur_row = -1; t_act = -100000; t_pre = -100000; t_rd = -100000;
    for (i = 0; i < NREQ; i++) begin
      row = addrs[i] >> COLW;
      if (row != cur_row) begin
        if (cur_row >= 0) begin
          chk(ev_op[k] == CMD_PRE, "PRE expected");
          chk(ev_t[k] == ((t_act + 76 > t_rd + 12) ? t_act + 76 : t_rd + 12), $sformatf("PRE time %0d", ev_t[k]));
          t_pre = ev_t[k]; k++;
        end
        chk(ev_op[k] == CMD_ACT, "ACT expected");
        if (cur_row >= 0)
          chk(ev_t[k] == ((t_pre + 40 > t_act + 116) ? t_pre + 40 : t_act + 116), $sformatf("ACT time %0d", ev_t[k]));
        t_act = ev_t[k]; k++; cur_row = row;
      end
      chk(ev_op[k] == CMD_RD && ev_a[k] == addrs[i], $sformatf("RD %0d", i));
      chk(ev_t[k] == ((t_act + 40 > t_rd + 12) ? t_act + 40 : t_rd + 12), $sformatf("RD time %0d", ev_t[k]));
      t_rd = ev_t[k]; k++;
    end
    chk(k == ev_op.size(), "extra commands");
    chk(rsp_n == NREQ, "responses");
    chk(errors == 0, "bank model protocol errors");
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

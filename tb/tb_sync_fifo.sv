// tb_sync_fifo: self-checking test of the FIFO at the rank-queue depth (5).
// Random pushes and pops are compared with a queue model: data order, count,
// in_ready falling exactly when 5 entries are held, out_valid when empty.
module tb_sync_fifo;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // falling edge: applies the asynchronous reset before the first clock
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [82:0] in_data = '0, out_data;
  logic [2:0]  count;
  int checks = 0, failures = 0, fulls = 0;
  logic [82:0] model[$];

  sync_fifo #(.WIDTH(83), .DEPTH(5)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      chk(count == 3'(model.size()), "count");
      chk(in_ready == (model.size() < 5), "in_ready");
      chk(out_valid == (model.size() > 0), "out_valid");
      if (out_valid && model.size() > 0) chk(out_data == model[0], "data");
      if (model.size() == 5) fulls++;
      in_valid  = ($urandom % 100) < ((i / 500) % 2 ? 70 : 35);
      out_ready = ($urandom % 100) < ((i / 500) % 2 ? 35 : 70);
      in_data   = {$urandom, $urandom, $urandom};
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    chk(fulls > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

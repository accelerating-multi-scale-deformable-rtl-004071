// dram_bank_model: behavioural model of one DRAM bank for the testbenches
// (not synthesizable, not part of the design).
//
// It follows the commands of a bank command decoder: ACT opens a row, RD
// returns the 256-bit burst at {row, col} TCL cycles later on rd_valid /
// rd_data, PRE closes the row. Storage holds DEPTH bursts (the burst address
// wraps); it starts with the pattern tb_fp_pkg::pat(ID, addr, lane), and a
// testbench can overwrite bursts through the shared write port (wr_en with
// wr_sel == ID). It counts protocol errors (RD to a closed or other row, ACT
// to an open bank, ACT->RD closer than TRCD, PRE->ACT closer than TRP) and the
// ACT, RD and PRE commands it saw.
module dram_bank_model
  import danmp_pkg::*;
#(
  parameter int ID    = 0,
  parameter int TCL   = 40,
  parameter int TRCD  = 40,
  parameter int TRP   = 40,
  parameter int DEPTH = 1024
) (
  input  logic                   clk,
  input  dram_cmd_t              cmd,
  output logic                   rd_valid,
  output logic [LANES-1:0][31:0] rd_data,
  input  logic                   wr_en,
  input  int                     wr_sel,
  input  int                     wr_addr,
  input  logic [LANES-1:0][31:0] wr_data,
  output int                     errors,
  output int                     n_act,
  output int                     n_rd,
  output int                     n_pre
);
  logic [LANES-1:0][31:0] mem [DEPTH];
  logic                   pv [TCL];
  logic [LANES-1:0][31:0] pd [TCL];
  logic                   open_q = 1'b0;
  logic [ROWW-1:0]        open_row = '0;
  int                     t_act = -1000, t_pre = -1000, now = 0;

  initial begin
    errors = 0; n_act = 0; n_rd = 0; n_pre = 0;
    for (int a = 0; a < DEPTH; a++)
      for (int l = 0; l < LANES; l++) mem[a][l] = tb_fp_pkg::pat(ID, a, l);
    for (int i = 0; i < TCL; i++) begin pv[i] = 1'b0; pd[i] = '0; end
  end

  assign rd_valid = pv[TCL-1];
  assign rd_data  = pd[TCL-1];

  always @(posedge clk) begin
    now <= now + 1;
    if (wr_en && wr_sel == ID) mem[wr_addr % DEPTH] <= wr_data;
    for (int i = TCL - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= 1'b0;
    case (cmd.op)
      CMD_ACT: begin
        n_act <= n_act + 1;
        if (open_q || now - t_pre < TRP) errors <= errors + 1;
        open_q <= 1'b1; open_row <= cmd.row; t_act <= now;
      end
      CMD_RD: begin
        n_rd <= n_rd + 1;
        if (!open_q || open_row != cmd.row || now - t_act < TRCD) errors <= errors + 1;
        pv[0] <= 1'b1;
        pd[0] <= mem[((int'(cmd.row) << COLW) | int'(cmd.col)) % DEPTH];
      end
      CMD_PRE: begin
        n_pre <= n_pre + 1;
        open_q <= 1'b0; t_pre <= now;
      end
      default: ;
    endcase
  end
endmodule

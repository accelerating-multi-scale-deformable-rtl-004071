// bank_cmd_decoder: the Bank.CmdDecoder of a PE - address decoder, request
// queue and DRAM command generator for one bank.
//
// A PE pushes read requests, each the burst address of one 256-bit column
// access, into the request queue (valid/ready). The address decoder splits the
// head request into row (addr >> COLW) and column (addr[COLW-1:0]). The
// command generator keeps the state of the bank under an open-page policy: a
// request to the open row issues RD; a request to another row first issues
// PRE, then ACT, then RD. It counts the cycles since the last ACT, PRE and RD
// and holds each command until tRCD (ACT->RD), tRAS (ACT->PRE), tRP (PRE->ACT),
// tRC (ACT->ACT) and tCCD (RD->RD) have passed. At most one command leaves per
// cycle, registered, on dram_cmd. Read data comes back from the bank tCL after
// RD in request order and is wired straight to the PE by the parent.
//
// The timing values are the paper's DDR5-4800 numbers (tCCD is its tCCD_L);
// this single-clock design counts them in cycles of the NMP clock, which is
// conservative. The paper names this block and its three parts only; the
// policy and the row/column split are this design's choices.
module bank_cmd_decoder
  import danmp_pkg::*;
#(
  parameter int TRCD   = 40,
  parameter int TRP    = 40,
  parameter int TRAS   = 76,
  parameter int TRC    = 116,
  parameter int TCCD   = 12,
  parameter int QDEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic [31:0] req_addr,
  output dram_cmd_t   dram_cmd,
  output logic        busy
);
  localparam int CNTW = 8;
  localparam int QCW  = $clog2(QDEPTH + 1);

  logic            q_valid, q_pop;
  logic [31:0]     q_addr;
  logic [QCW-1:0]  q_count;
  logic            open_q;
  logic [ROWW-1:0] open_row, h_row;
  logic [COLW-1:0] h_col;
  logic [CNTW-1:0] c_act, c_pre, c_rd;
  dram_op_e        issue;

  sync_fifo #(.WIDTH(32), .DEPTH(QDEPTH)) u_reqq (
    .clk, .rst_n, .in_valid(req_valid), .in_ready(req_ready), .in_data(req_addr),
    .out_valid(q_valid), .out_ready(q_pop), .out_data(q_addr), .count(q_count));

  // address decoder
  assign h_row = q_addr[COLW +: ROWW];
  assign h_col = q_addr[COLW-1:0];

  // command generator
  always_comb begin
    issue = CMD_NOP;
    if (q_valid) begin
      if (open_q && open_row == h_row) begin
        if (c_act >= CNTW'(TRCD) && c_rd >= CNTW'(TCCD)) issue = CMD_RD;
      end else if (open_q) begin
        if (c_act >= CNTW'(TRAS) && c_rd >= CNTW'(TCCD)) issue = CMD_PRE;
      end else begin
        if (c_pre >= CNTW'(TRP) && c_act >= CNTW'(TRC)) issue = CMD_ACT;
      end
    end
  end
  assign q_pop = (issue == CMD_RD);

  function automatic logic [CNTW-1:0] sat_inc(logic [CNTW-1:0] c);
    return (c == '1) ? c : c + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q   <= 1'b0;
      open_row <= '0;
      c_act    <= '1;
      c_pre    <= '1;
      c_rd     <= '1;
      dram_cmd <= '{op: CMD_NOP, row: '0, col: '0};
    end else begin
      c_act <= (issue == CMD_ACT) ? CNTW'(1) : sat_inc(c_act);
      c_pre <= (issue == CMD_PRE) ? CNTW'(1) : sat_inc(c_pre);
      c_rd  <= (issue == CMD_RD)  ? CNTW'(1) : sat_inc(c_rd);
      if (issue == CMD_ACT) begin open_q <= 1'b1; open_row <= h_row; end
      if (issue == CMD_PRE) open_q <= 1'b0;
      dram_cmd <= '{op: issue, row: h_row, col: h_col};
    end
  end

  assign busy = (q_count != '0);

  initial begin
    assert (TRC < 2 ** CNTW && TRAS < 2 ** CNTW) else $error("timing counters too narrow");
  end
endmodule

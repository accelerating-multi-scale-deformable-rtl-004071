// bank_nmp: near-bank NMP unit, built into the banks that carry a PE (banks 0
// and 2 of every bank-group in the default configuration, half of all banks).
//
// Instructions from the bank-group (Bank.NMP-Inst) enter a small instruction
// buffer; the sampling PE behind it decodes the opcode and runs Index, Interp,
// WSum or Clr. The PE's reads go through the bank command decoder, which
// drives this bank's DRAM command port only: a near-bank PE works in local
// access mode and never touches another bank. Read data from the bank returns
// on dram_rd_valid/dram_rd_data. The partial sums (Bank Psum) are read by the
// BG-NMP through psum_rd_*; idle tells it that the buffer is empty and nothing
// is in flight. The structure (instruction buffer, decoder, command decoder,
// ICU/BICU/MAC) follows the paper; the buffer depth is this design's choice.
module bank_nmp
  import danmp_pkg::*;
#(
  parameter int IBUF_DEPTH = 2,
  parameter int TRCD = 40,
  parameter int TRP  = 40,
  parameter int TRAS = 76,
  parameter int TRC  = 116,
  parameter int TCCD = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inst_valid,
  output logic                   inst_ready,
  input  nmp_inst_t              inst,
  output dram_cmd_t              dram_cmd,
  input  logic                   dram_rd_valid,
  input  logic [LANES-1:0][31:0] dram_rd_data,
  input  logic [3:0]             psum_rd_tag,
  input  logic [2:0]             psum_rd_burst,
  output logic [LANES-1:0][31:0] psum_rd_data,
  output logic                   idle
);
  localparam int CW = $clog2(IBUF_DEPTH + 1);
  logic          b_valid, b_ready, pe_idle, cmd_busy;
  logic [INST_W-1:0] b_data;
  logic [CW-1:0] b_count;
  logic          req_valid, req_ready;
  logic [1:0]    req_ba;
  logic [31:0]   req_addr;

  sync_fifo #(.WIDTH(INST_W), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n, .in_valid(inst_valid), .in_ready(inst_ready), .in_data(inst),
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data), .count(b_count));

  sampling_pe u_pe (
    .clk, .rst_n, .inst_valid(b_valid), .inst_ready(b_ready), .inst(nmp_inst_t'(b_data)),
    .req_valid, .req_ready, .req_ba, .req_addr,
    .rsp_valid(dram_rd_valid), .rsp_data(dram_rd_data),
    .psum_rd_tag, .psum_rd_burst, .psum_rd_data, .idle(pe_idle));

  bank_cmd_decoder #(.TRCD(TRCD), .TRP(TRP), .TRAS(TRAS), .TRC(TRC), .TCCD(TCCD)) u_cmd (
    .clk, .rst_n, .req_valid, .req_ready, .req_addr, .dram_cmd, .busy(cmd_busy));

  assign idle = (b_count == '0) && pe_idle && !cmd_busy;
endmodule

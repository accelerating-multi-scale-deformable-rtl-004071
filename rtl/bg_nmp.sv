// bg_nmp: near-bank-group NMP unit, one per bank-group of a rank.
//
// It holds the four banks of the group: banks 0 and 2 carry a Bank-NMP (hot
// data), banks 1 and 3 do not (cold data). Instructions arrive from the
// Rank-NMP in an instruction queue; the decoder (Bank-Se) looks at the head:
//  * NMP_Se = Bank and BA names a bank with a PE: sent to that Bank-NMP.
//  * NMP_Se = Bank and BA names a bank without a PE, or NMP_Se = BG with an
//    Index/Interp/WSum/Clr opcode: executed by the group's own sampling PE
//    (its Index CU and BI CU), which reads the cold bank through that bank's
//    command decoder. Only banks 1 and 3 are reachable this way (BA bit 1
//    picks which), so raw pixels never cross between banks.
//  * NMP_Se = BG with Sum or Mean: reduction. The group waits until its PEs are
//    idle, then for every burst adds its own partial sum and those of banks 0
//    and 2 for the tag, one FP32 adder per lane (3 cycles per addition); Mean
//    also multiplies by W_value. The result goes into the output buffer (BG
//    Psum), one entry per tag and burst, overwritten by every reduction.
//  * anything else is consumed without effect.
// The Rank-NMP reads BG Psum through psum_rd_*, after idle is high.
//
// The PE placement (banks 0 and 2) and the block list follow the paper's
// figure of this unit; the routing rules, the wait-for-idle synchronisation and
// the serial adder schedule are this design's choices.
module bg_nmp
  import danmp_pkg::*;
#(
  parameter int IQ_DEPTH   = 4,
  parameter int IBUF_DEPTH = 2,
  parameter int TRCD = 40,
  parameter int TRP  = 40,
  parameter int TRAS = 76,
  parameter int TRC  = 116,
  parameter int TCCD = 12,
  localparam int NBANK = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inst_valid,
  output logic                   inst_ready,
  input  nmp_inst_t              inst,
  output dram_cmd_t              dram_cmd      [NBANK],
  input  logic                   dram_rd_valid [NBANK],
  input  logic [LANES-1:0][31:0] dram_rd_data  [NBANK],
  input  logic [3:0]             psum_rd_tag,
  input  logic [2:0]             psum_rd_burst,
  output logic [LANES-1:0][31:0] psum_rd_data,
  output logic                   idle
);
  localparam logic [NBANK-1:0] PE_MASK = 4'b0101;
  localparam int QCW = $clog2(IQ_DEPTH + 1);

  // ------------------------------------------------------------ queue ----
  logic              q_valid, q_ready;
  logic [INST_W-1:0] q_data;
  logic [QCW-1:0]    q_count;
  nmp_inst_t         hd;
  logic [1:0]        hd_ba;

  sync_fifo #(.WIDTH(INST_W), .DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n, .in_valid(inst_valid), .in_ready(inst_ready), .in_data(inst),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .count(q_count));

  assign hd    = nmp_inst_t'(q_data);
  assign hd_ba = daddr_ba(hd.daddr);

  // ---------------------------------------------------------- decoder ----
  logic to_bank, to_pe, to_red;
  always_comb begin
    to_bank = (hd.nmp_se == SE_BANK) && PE_MASK[hd_ba];
    to_pe   = ((hd.nmp_se == SE_BANK) && !PE_MASK[hd_ba]) ||
              ((hd.nmp_se == SE_BG) && (hd.op inside {OP_INDEX, OP_INTERP, OP_WSUM, OP_CLR}));
    to_red  = (hd.nmp_se == SE_BG) && (hd.op inside {OP_SUM, OP_MEAN});
  end

  // ------------------------------------------------------------ banks ----
  logic                   bk_inst_valid [NBANK];
  logic                   bk_inst_ready [NBANK];
  logic [LANES-1:0][31:0] bk_psum       [NBANK];
  logic                   bk_idle       [NBANK];
  logic [3:0]             red_tag;
  logic [2:0]             red_b;

  // own sampling PE for the banks without PE
  logic                   pe_inst_valid, pe_inst_ready, pe_idle;
  logic                   pe_req_valid, pe_req_ready;
  logic [1:0]             pe_req_ba;
  logic [31:0]            pe_req_addr;
  logic                   pe_rsp_valid;
  logic [LANES-1:0][31:0] pe_rsp_data, pe_psum;
  logic                   cold_req_ready [NBANK];
  logic                   cold_busy      [NBANK];

  for (genvar k = 0; k < NBANK; k++) begin : g_bank
    if (PE_MASK[k]) begin : g_pe
      assign bk_inst_valid[k] = q_valid && to_bank && (hd_ba == 2'(k));
      bank_nmp #(.IBUF_DEPTH(IBUF_DEPTH), .TRCD(TRCD), .TRP(TRP), .TRAS(TRAS), .TRC(TRC), .TCCD(TCCD)) u_bank (
        .clk, .rst_n, .inst_valid(bk_inst_valid[k]), .inst_ready(bk_inst_ready[k]), .inst(hd),
        .dram_cmd(dram_cmd[k]), .dram_rd_valid(dram_rd_valid[k]), .dram_rd_data(dram_rd_data[k]),
        .psum_rd_tag(red_tag), .psum_rd_burst(red_b), .psum_rd_data(bk_psum[k]), .idle(bk_idle[k]));
      assign cold_req_ready[k] = 1'b0;
      assign cold_busy[k]      = 1'b0;
    end else begin : g_cold
      assign bk_inst_valid[k] = 1'b0;
      assign bk_inst_ready[k] = 1'b0;
      assign bk_psum[k]       = '0;
      assign bk_idle[k]       = 1'b1;
      bank_cmd_decoder #(.TRCD(TRCD), .TRP(TRP), .TRAS(TRAS), .TRC(TRC), .TCCD(TCCD)) u_cmd (
        .clk, .rst_n, .req_valid(pe_req_valid && (pe_req_ba[1] == 1'(k >> 1))),
        .req_ready(cold_req_ready[k]), .req_addr(pe_req_addr), .dram_cmd(dram_cmd[k]),
        .busy(cold_busy[k]));
    end
  end

  always_comb begin
    pe_req_ready = 1'b0;
    pe_rsp_valid = 1'b0;
    pe_rsp_data  = '0;
    for (int k = 0; k < NBANK; k++) if (!PE_MASK[k]) begin
      if (pe_req_ba[1] == 1'(k >> 1)) pe_req_ready = cold_req_ready[k];
      if (dram_rd_valid[k]) begin
        pe_rsp_valid = 1'b1;
        pe_rsp_data  = dram_rd_data[k];
      end
    end
  end

  assign pe_inst_valid = q_valid && to_pe;
  sampling_pe u_pe (
    .clk, .rst_n, .inst_valid(pe_inst_valid), .inst_ready(pe_inst_ready), .inst(hd),
    .req_valid(pe_req_valid), .req_ready(pe_req_ready), .req_ba(pe_req_ba), .req_addr(pe_req_addr),
    .rsp_valid(pe_rsp_valid), .rsp_data(pe_rsp_data),
    .psum_rd_tag(red_tag), .psum_rd_burst(red_b), .psum_rd_data(pe_psum), .idle(pe_idle));

  // -------------------------------------------------------- reduction ----
  typedef enum logic [2:0] {R_IDLE, R_WAIT, R_LOAD, R_ADD, R_ADDW, R_MUL, R_MULW} rstate_e;
  rstate_e rs;
  logic    red_mean;
  logic [2:0] red_last;
  logic [31:0] red_w;
  logic [1:0] red_k;
  logic [LANES-1:0][31:0] acc, add_y, mul_y, wv;
  logic    add_go, add_done, mul_go, mul_done;
  logic [LANES-1:0][31:0] obuf [NTAGS][MAXNB];
  logic    all_idle;

  always_comb begin
    all_idle = pe_idle;
    for (int k = 0; k < NBANK; k++) all_idle &= bk_idle[k] & !cold_busy[k];
    for (int l = 0; l < LANES; l++) wv[l] = red_w;
  end

  fp32_add #(.LAT(3), .LANES(LANES)) u_add (
    .clk, .rst_n, .in_valid(add_go), .a(acc), .b(bk_psum[red_k]), .out_valid(add_done), .y(add_y));
  fp32_mul #(.LAT(4), .LANES(LANES)) u_mul (
    .clk, .rst_n, .in_valid(mul_go), .a(acc), .b(wv), .out_valid(mul_done), .y(mul_y));

  assign add_go = (rs == R_ADD);
  assign mul_go = (rs == R_MUL);

  assign q_ready = q_valid && (to_bank ? bk_inst_ready[hd_ba] :
                               to_pe   ? pe_inst_ready :
                               to_red  ? (rs == R_IDLE) : 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; red_tag <= '0; red_b <= '0; red_mean <= 1'b0; red_last <= '0;
      red_w <= '0; red_k <= '0; acc <= '0;
      for (int t = 0; t < NTAGS; t++) for (int k = 0; k < MAXNB; k++) obuf[t][k] <= '0;
    end else begin
      case (rs)
        R_IDLE: if (q_valid && to_red) begin
          red_tag  <= hd.psum_tag;
          red_last <= hd.vsize;
          red_mean <= (hd.op == OP_MEAN);
          red_w    <= hd.w_value;
          red_b    <= '0;
          rs       <= R_WAIT;
        end
        R_WAIT: if (all_idle) rs <= R_LOAD;
        R_LOAD: begin                      // own cold-data partial sum first
          acc   <= pe_psum;
          red_k <= 2'd0;
          rs    <= R_ADD;
        end
        R_ADD:  rs <= R_ADDW;
        R_ADDW: if (add_done) begin
          acc <= add_y;
          if (red_k == 2'd2) rs <= red_mean ? R_MUL : R_MULW;
          else begin red_k <= 2'd2; rs <= R_ADD; end
        end
        R_MUL:  rs <= R_MULW;
        R_MULW: if (!red_mean || mul_done) begin
          obuf[red_tag][red_b] <= red_mean ? mul_y : acc;
          if (red_b == red_last) rs <= R_IDLE;
          else begin red_b <= red_b + 3'd1; rs <= R_LOAD; end
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  assign psum_rd_data = obuf[psum_rd_tag][psum_rd_burst];
  assign idle = (q_count == '0) && (rs == R_IDLE) && all_idle;
endmodule

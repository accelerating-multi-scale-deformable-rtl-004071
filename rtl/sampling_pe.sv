// sampling_pe: the multi-scale grid-sampling processing element. One sits in
// every Bank-NMP; the BG-NMP has one more for the banks without a PE.
//
// It executes four opcodes of an NMP instruction:
//  * Index: reads the 256-bit sampling record at the bank address in Daddr
//    into the I-Register (lanes 0..6: px, py, dx, dy, tile width w, tile height
//    h, burst address of the tile's pixel 0) and runs the ICU on it; the
//    fractions, neighbour flags and pixel indices are kept for what follows.
//  * Interp / WSum: for every burst b of the pixel vector (vsize+1 bursts,
//    stored one pixel after another), reads the four neighbours at
//    base + index*(vsize+1) + b through the bank command decoder, interpolates
//    them in the BICU and passes the result through the MAC unit: Interp
//    writes psum[tag][b] = result, WSum adds W_value * result into it.
//  * Clr: zeroes psum[tag].
// Other opcodes are consumed without effect. The partial sums (the O-Register
// file, 16 tags x 8 bursts x 8 lanes) are readable by the level above through
// psum_rd_tag / psum_rd_burst; a reader must wait for idle.
//
// Handshake: inst_ready is high only in the idle state; read requests use
// valid/ready and carry the bank field of Daddr on req_ba; responses return in
// order on rsp_valid. Timing: bursts are handled one after another, each
// costing four DRAM reads plus 11 (BICU) + 7 (MAC) cycles. The opcode
// encoding, the record layout and the serial burst schedule are this design's
// choices; the ICU -> BICU -> MAC chain is the paper's.
module sampling_pe
  import danmp_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inst_valid,
  output logic                   inst_ready,
  input  nmp_inst_t              inst,
  output logic                   req_valid,
  input  logic                   req_ready,
  output logic [1:0]             req_ba,
  output logic [31:0]            req_addr,
  input  logic                   rsp_valid,
  input  logic [LANES-1:0][31:0] rsp_data,
  input  logic [3:0]             psum_rd_tag,
  input  logic [2:0]             psum_rd_burst,
  output logic [LANES-1:0][31:0] psum_rd_data,
  output logic                   idle
);
  typedef enum logic [2:0] {S_IDLE, S_REC_REQ, S_REC_WAIT, S_ICU, S_PX, S_CALC} state_e;
  state_e state;

  nmp_inst_t cur;
  // I-Register
  logic signed [31:0] r_px, r_py, r_dx, r_dy;
  logic [15:0]        r_w, r_h;
  logic [31:0]        r_base;
  // ICU results
  logic [FRAC-1:0]    i_fx, i_fy, c_fx, c_fy;
  logic [3:0]         i_nv, c_nv;
  logic [3:0][31:0]   i_idx, c_idx;

  logic [2:0]         b;
  logic [2:0]         nreq, nrsp;
  logic [3:0][LANES-1:0][31:0] fbuf;
  logic               bi_start, bi_valid, mac_valid;
  logic [LANES-1:0][31:0] bi_out, mac_out;
  logic [LANES-1:0][31:0] psum [NTAGS][MAXNB];
  logic [3:0]         nb;

  icu #(.FRAC(FRAC)) u_icu (
    .px(r_px), .py(r_py), .dx(r_dx), .dy(r_dy), .w(r_w), .h(r_h),
    .fx(c_fx), .fy(c_fy), .nvalid(c_nv), .idx(c_idx));

  bicu #(.FRAC_BITS(FRAC)) u_bicu (
    .clk, .rst_n, .in_valid(bi_start), .fx(i_fx), .fy(i_fy), .nvalid(i_nv), .f(fbuf),
    .out_valid(bi_valid), .out(bi_out));

  mac_unit u_mac (
    .clk, .rst_n, .in_valid(bi_valid), .x(bi_out),
    .w((cur.op == OP_WSUM) ? cur.w_value : FP_ONE),
    .acc(psum[cur.psum_tag][b]), .accumulate(cur.op == OP_WSUM),
    .out_valid(mac_valid), .out(mac_out));

  assign nb         = 4'(cur.vsize) + 4'd1;
  assign inst_ready = (state == S_IDLE);
  assign idle       = (state == S_IDLE);
  assign req_ba     = daddr_ba(cur.daddr);
  assign psum_rd_data = psum[psum_rd_tag][psum_rd_burst];

  always_comb begin
    req_valid = 1'b0;
    req_addr  = daddr_burst(cur.daddr);
    if (state == S_REC_REQ) req_valid = 1'b1;
    if (state == S_PX && nreq < 3'd4) begin
      req_valid = 1'b1;
      req_addr  = r_base + i_idx[nreq[1:0]] * 32'(nb) + 32'(b);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      b        <= '0;
      nreq     <= '0;
      nrsp     <= '0;
      bi_start <= 1'b0;
      {r_px, r_py, r_dx, r_dy, r_w, r_h, r_base} <= '0;
      {i_fx, i_fy, i_nv, i_idx} <= '0;
      for (int t = 0; t < NTAGS; t++) for (int k = 0; k < MAXNB; k++) psum[t][k] <= '0;
    end else begin
      bi_start <= 1'b0;
      case (state)
        S_IDLE: if (inst_valid) begin
          cur <= inst;
          case (inst.op)
            OP_INDEX:          state <= S_REC_REQ;
            OP_INTERP, OP_WSUM: begin
              state <= S_PX; b <= '0; nreq <= '0; nrsp <= '0;
            end
            OP_CLR: for (int k = 0; k < MAXNB; k++) psum[inst.psum_tag][k] <= '0;
            default: ;
          endcase
        end
        S_REC_REQ: if (req_ready) state <= S_REC_WAIT;
        S_REC_WAIT: if (rsp_valid) begin
          r_px   <= rsp_data[0];
          r_py   <= rsp_data[1];
          r_dx   <= rsp_data[2];
          r_dy   <= rsp_data[3];
          r_w    <= rsp_data[4][15:0];
          r_h    <= rsp_data[5][15:0];
          r_base <= rsp_data[6];
          state  <= S_ICU;
        end
        S_ICU: begin
          i_fx <= c_fx; i_fy <= c_fy; i_nv <= c_nv; i_idx <= c_idx;
          state <= S_IDLE;
        end
        S_PX: begin
          if (req_valid && req_ready) nreq <= nreq + 3'd1;
          if (rsp_valid) begin
            fbuf[nrsp[1:0]] <= rsp_data;
            nrsp <= nrsp + 3'd1;
            if (nrsp == 3'd3) begin
              bi_start <= 1'b1;
              state    <= S_CALC;
            end
          end
        end
        S_CALC: if (mac_valid) begin
          psum[cur.psum_tag][b] <= mac_out;
          if (b == cur.vsize) state <= S_IDLE;
          else begin
            b <= b + 3'd1; nreq <= '0; nrsp <= '0; state <= S_PX;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a response is only expected while a read is outstanding
  assert property (@(posedge clk) disable iff (!rst_n)
                   rsp_valid |-> (state == S_REC_WAIT || state == S_PX));
endmodule

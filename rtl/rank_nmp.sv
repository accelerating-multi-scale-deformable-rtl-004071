// rank_nmp: near-rank NMP unit in the DIMM buffer chip, one per rank.
//
// NMP instructions for this rank enter a 5-entry instruction queue. The
// decoder forwards every instruction whose NMP_Se is BG or Bank to the
// bank-group named by the BG field of Daddr (valid/ready; a full BG queue
// stalls the rank queue, and a full rank queue stalls the host). Rank-level
// instructions (NMP_Se = Rank) are executed here:
//  * Sum / Mean: wait until all bank-groups are idle, then for each burst add
//    the eight BG partial sums of the tag into the rank partial-sum register
//    of that tag, one FP32 adder per lane (the rank accumulates contributions
//    of successive feature-map levels this way); Mean then scales the register
//    by W_value.
//  * Read: push the tag's bursts into the output buffer towards the host; the
//    host concatenates the heads by reading their tags in order.
//  * Clr: zero the tag's register.
// Other opcodes are consumed without effect.
//
// Timing: each BG addition takes the 3-cycle FP32 adder, so a Sum costs about
// 8 x 4 cycles per burst once the bank-groups are idle. The queue depth is
// the paper's; the opcode set, the idle synchronisation and the output buffer
// depth are this design's choices.
module rank_nmp
  import danmp_pkg::*;
#(
  parameter int NBG      = 8,
  parameter int IQ_DEPTH = 5,
  parameter int OB_DEPTH = 8,
  parameter bit RANK_ID  = 1'b0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   inst_valid,
  output logic                   inst_ready,
  input  nmp_inst_t              inst,
  output logic                   bg_inst_valid [NBG],
  input  logic                   bg_inst_ready [NBG],
  output nmp_inst_t              bg_inst,
  output logic [3:0]             bg_psum_tag,
  output logic [2:0]             bg_psum_burst,
  input  logic [LANES-1:0][31:0] bg_psum_data  [NBG],
  input  logic                   bg_idle       [NBG],
  output logic                   out_valid,
  input  logic                   out_ready,
  output result_t                out,
  output logic                   idle
);
  localparam int QCW = $clog2(IQ_DEPTH + 1);
  localparam int OCW = $clog2(OB_DEPTH + 1);
  localparam int GW  = (NBG > 1) ? $clog2(NBG) : 1;

  logic              q_valid, q_ready;
  logic [INST_W-1:0] q_data;
  logic [QCW-1:0]    q_count;
  nmp_inst_t         hd;
  logic [GW-1:0]     hd_bg;

  sync_fifo #(.WIDTH(INST_W), .DEPTH(IQ_DEPTH)) u_iq (
    .clk, .rst_n, .in_valid(inst_valid), .in_ready(inst_ready), .in_data(inst),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .count(q_count));

  assign hd    = nmp_inst_t'(q_data);
  assign hd_bg = GW'(daddr_bg(hd.daddr));
  assign bg_inst = hd;

  logic to_bg, to_local;
  assign to_bg    = (hd.nmp_se == SE_BG) || (hd.nmp_se == SE_BANK);
  assign to_local = (hd.nmp_se == SE_RANK) && (hd.op inside {OP_SUM, OP_MEAN, OP_READ, OP_CLR});

  always_comb for (int g = 0; g < NBG; g++)
    bg_inst_valid[g] = q_valid && to_bg && (hd_bg == GW'(g));

  // ------------------------------------------------------ rank datapath ----
  typedef enum logic [2:0] {A_IDLE, A_WAIT, A_ADD, A_ADDW, A_MUL, A_MULW, A_READ} astate_e;
  astate_e as;
  opcode_e op_q;
  logic [3:0]  tag_q;
  logic [2:0]  last_q, b_q;
  logic [31:0] w_q;
  logic [GW-1:0] g_q;
  logic [LANES-1:0][31:0] acc, add_y, mul_y, wv;
  logic [LANES-1:0][31:0] rpsum [NTAGS][MAXNB];
  logic add_go, add_done, mul_go, mul_done, bgs_idle;
  logic ob_in_valid, ob_in_ready;
  logic [OCW-1:0] ob_count;
  result_t ob_in;
  logic [$bits(result_t)-1:0] ob_out;

  always_comb begin
    bgs_idle = 1'b1;
    for (int g = 0; g < NBG; g++) bgs_idle &= bg_idle[g];
    for (int l = 0; l < LANES; l++) wv[l] = w_q;
  end

  assign bg_psum_tag   = tag_q;
  assign bg_psum_burst = b_q;
  assign add_go = (as == A_ADD);
  assign mul_go = (as == A_MUL);

  fp32_add #(.LAT(3), .LANES(LANES)) u_add (
    .clk, .rst_n, .in_valid(add_go), .a(acc), .b(bg_psum_data[g_q]), .out_valid(add_done), .y(add_y));
  fp32_mul #(.LAT(4), .LANES(LANES)) u_mul (
    .clk, .rst_n, .in_valid(mul_go), .a(acc), .b(wv), .out_valid(mul_done), .y(mul_y));

  assign q_ready = q_valid && (to_bg ? bg_inst_ready[hd_bg] :
                               to_local ? (as == A_IDLE) : 1'b1);

  assign ob_in_valid = (as == A_READ);
  assign ob_in = '{rank: RANK_ID, tag: tag_q, burst: b_q, data: rpsum[tag_q][b_q]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      as <= A_IDLE; op_q <= OP_NOP; tag_q <= '0; last_q <= '0; b_q <= '0; w_q <= '0;
      g_q <= '0; acc <= '0;
      for (int t = 0; t < NTAGS; t++) for (int k = 0; k < MAXNB; k++) rpsum[t][k] <= '0;
    end else begin
      case (as)
        A_IDLE: if (q_valid && to_local) begin
          op_q <= hd.op; tag_q <= hd.psum_tag; last_q <= hd.vsize; w_q <= hd.w_value; b_q <= '0;
          case (hd.op)
            OP_CLR:  for (int k = 0; k < MAXNB; k++) rpsum[hd.psum_tag][k] <= '0;
            OP_READ: as <= A_READ;
            default: as <= A_WAIT;
          endcase
        end
        A_WAIT: if (bgs_idle) begin
          acc <= rpsum[tag_q][b_q];
          g_q <= '0;
          as  <= A_ADD;
        end
        A_ADD:  as <= A_ADDW;
        A_ADDW: if (add_done) begin
          acc <= add_y;
          if (g_q == GW'(NBG - 1)) as <= (op_q == OP_MEAN) ? A_MUL : A_MULW;
          else begin g_q <= g_q + 1'b1; as <= A_ADD; end
        end
        A_MUL:  as <= A_MULW;
        A_MULW: if (op_q != OP_MEAN || mul_done) begin
          rpsum[tag_q][b_q] <= (op_q == OP_MEAN) ? mul_y : acc;
          if (b_q == last_q) as <= A_IDLE;
          else begin b_q <= b_q + 3'd1; as <= A_WAIT; end
        end
        A_READ: if (ob_in_ready) begin
          if (b_q == last_q) as <= A_IDLE;
          else b_q <= b_q + 3'd1;
        end
        default: as <= A_IDLE;
      endcase
    end
  end

  // output buffer towards the DIMM interface
  sync_fifo #(.WIDTH($bits(result_t)), .DEPTH(OB_DEPTH)) u_ob (
    .clk, .rst_n, .in_valid(ob_in_valid), .in_ready(ob_in_ready), .in_data(ob_in),
    .out_valid, .out_ready, .out_data(ob_out), .count(ob_count));
  assign out = result_t'(ob_out);

  assign idle = (q_count == '0) && (as == A_IDLE) && bgs_idle && (ob_count == '0);
endmodule

// danmp_pkg: types, constants and arithmetic functions shared by the DANMP
// near-memory-processing RTL.
//
// The 83-bit NMP instruction is laid out field by field in the order and with
// the widths of the published format: Mode_Se (1), NMP_Se (2), Op_Code (4),
// DDR_cmd (3), Daddr (32), vsize (3), W_value (FP32, 32) and PsumTag (4). These
// fields add up to 81 bits while the format is stated to be 83 bits wide, so two
// reserved bits are placed at the top. The numeric encodings of NMP_Se and
// Op_Code, the split of Daddr into rank/bank-group/bank/row/column and the
// coordinate fixed-point format are choices of this implementation.
//
// The FP32 helpers implement IEEE-754 single precision with round-to-nearest-even;
// subnormals are flushed to zero. They are pure combinational functions; the
// fp32_add and fp32_mul modules add the pipeline registers.
package danmp_pkg;

  localparam int INST_W   = 83;
  localparam int LANES    = 8;              // FP32 lanes per 256-bit burst
  localparam int DW       = LANES * 32;
  localparam int NTAGS    = 16;             // 4-bit PsumTag
  localparam int MAXNB    = 8;              // 3-bit vsize: 1..8 bursts per vector
  localparam int FRAC     = 8;              // fraction bits of coordinates
  localparam int COLW     = 5;              // 32 bursts per DRAM row
  localparam int ROWW     = 16;

  localparam logic [31:0] FP_ONE  = 32'h3f80_0000;
  localparam logic [31:0] FP_ZERO = 32'h0000_0000;

  typedef enum logic {MODE_DRAM = 1'b0, MODE_NMP = 1'b1} mode_e;
  typedef enum logic [1:0] {SE_RANK = 2'd0, SE_BG = 2'd1, SE_BANK = 2'd2, SE_RSVD = 2'd3} nmp_se_e;
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_INDEX  = 4'd1,   // load a sampling record into the I-Register and run the ICU
    OP_INTERP = 4'd2,   // psum[tag] = bilinear interpolation
    OP_WSUM   = 4'd3,   // psum[tag] += W_value * bilinear interpolation
    OP_SUM    = 4'd4,   // reduce the partial sums of the level below
    OP_MEAN   = 4'd5,   // as OP_SUM, result scaled by W_value
    OP_CLR    = 4'd6,   // clear psum[tag]
    OP_READ   = 4'd7    // rank only: send psum[tag] to the host
  } opcode_e;

  typedef struct packed {
    logic [1:0]  rsvd;
    mode_e       mode_se;
    nmp_se_e     nmp_se;
    opcode_e     op;
    logic [2:0]  ddr_cmd;
    logic [31:0] daddr;
    logic [2:0]  vsize;
    logic [31:0] w_value;
    logic [3:0]  psum_tag;
  } nmp_inst_t;

  // Daddr = {RA[31], BG[30:28], BA[27:26], ROW[25:10], COL[9:0]}
  function automatic logic       daddr_ra (logic [31:0] d); return d[31];    endfunction
  function automatic logic [2:0] daddr_bg (logic [31:0] d); return d[30:28]; endfunction
  function automatic logic [1:0] daddr_ba (logic [31:0] d); return d[27:26]; endfunction
  // Burst address inside a bank addressed by the row and column fields.
  function automatic logic [31:0] daddr_burst(logic [31:0] d);
    return (32'(d[25:10]) << COLW) | 32'(d[COLW-1:0]);
  endfunction

  typedef enum logic [1:0] {CMD_NOP = 2'd0, CMD_ACT = 2'd1, CMD_RD = 2'd2, CMD_PRE = 2'd3} dram_op_e;
  typedef struct packed {
    dram_op_e        op;
    logic [ROWW-1:0] row;
    logic [COLW-1:0] col;
  } dram_cmd_t;

  typedef struct packed {
    logic          rank;
    logic [3:0]    tag;
    logic [2:0]    burst;
    logic [DW-1:0] data;
  } result_t;

  // ---------------------------------------------------------------- FP32 ----
  function automatic logic [31:0] fp_mul(logic [31:0] a, logic [31:0] b);
    logic        s;
    logic [7:0]  ea, eb;
    logic [47:0] p;
    logic [22:0] m;
    logic        g, st, inc;
    logic [24:0] mr;
    logic signed [10:0] e;
    s  = a[31] ^ b[31];
    ea = a[30:23];
    eb = b[30:23];
    if (ea == 8'hff || eb == 8'hff) begin
      if ((ea == 8'hff && a[22:0] != 0) || (eb == 8'hff && b[22:0] != 0)) return 32'h7fc0_0000;
      if (ea == 8'h00 || eb == 8'h00) return 32'h7fc0_0000;           // inf * 0
      return {s, 8'hff, 23'd0};
    end
    if (ea == 8'h00 || eb == 8'h00) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'(ea) + 11'(eb) - 11'sd127;
    if (p[47]) begin
      m = p[46:24]; g = p[23]; st = |p[22:0]; e = e + 11'sd1;
    end else begin
      m = p[45:23]; g = p[22]; st = |p[21:0];
    end
    inc = g & (st | m[0]);
    mr  = {2'b01, m} + 25'(inc);
    if (mr[24]) e = e + 11'sd1;
    if (e >= 11'sd255) return {s, 8'hff, 23'd0};
    if (e <= 11'sd0)   return {s, 31'd0};
    return {s, e[7:0], mr[24] ? 23'd0 : mr[22:0]};
  endfunction

  function automatic logic [31:0] fp_add(logic [31:0] a, logic [31:0] b);
    logic [31:0] x, y;
    logic [7:0]  d8;
    logic [26:0] mx, my, sh;
    logic [27:0] s;
    logic [22:0] m;
    logic        inc, stk;
    logic [24:0] mr;
    logic signed [10:0] e;
    int          lz;
    if (a[30:23] == 8'hff || b[30:23] == 8'hff) begin
      if ((a[30:23] == 8'hff && a[22:0] != 0) || (b[30:23] == 8'hff && b[22:0] != 0)) return 32'h7fc0_0000;
      if (a[30:23] == 8'hff && b[30:23] == 8'hff && a[31] != b[31]) return 32'h7fc0_0000;
      return (a[30:23] == 8'hff) ? a : b;
    end
    if (a[30:23] == 8'h00 && b[30:23] == 8'h00) return {a[31] & b[31], 31'd0};
    if (a[30:23] == 8'h00) return b;
    if (b[30:23] == 8'h00) return a;
    // order by magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    mx = {1'b1, x[22:0], 3'b000};
    my = {1'b1, y[22:0], 3'b000};
    d8 = x[30:23] - y[30:23];
    if (d8 >= 8'd27) begin
      sh = 27'd1;                                      // only sticky survives
    end else begin
      stk = 1'b0;
      for (int i = 0; i < 27; i++) if (i < int'(d8) && my[i]) stk = 1'b1;
      sh = (my >> d8) | 27'(stk);
    end
    e = 11'(x[30:23]);
    if (x[31] == y[31]) begin
      s = {1'b0, mx} + {1'b0, sh};
      if (s[27]) begin
        s = {1'b0, s[27:2], s[1] | s[0]};
        e = e + 11'sd1;
      end
    end else begin
      s = {1'b0, mx} - {1'b0, sh};
      if (s == 0) return 32'h0000_0000;
      lz = 0;
      for (int i = 26; i >= 0; i--) begin
        if (s[i]) break;
        lz++;
      end
      s = s << lz;
      e = e - 11'(lz);
    end
    if (e <= 11'sd0) return {x[31], 31'd0};
    m   = s[25:3];
    inc = s[2] & (s[1] | s[0] | m[0]);
    mr  = {2'b01, m} + 25'(inc);
    if (mr[24]) e = e + 11'sd1;
    if (e >= 11'sd255) return {x[31], 8'hff, 23'd0};
    return {x[31], e[7:0], mr[24] ? 23'd0 : mr[22:0]};
  endfunction

  // Unsigned integer u (below 2^24, so exact) times 2^-shift, as FP32.
  function automatic logic [31:0] fp_from_uint(logic [23:0] u, int unsigned shift);
    int k;
    logic [23:0] n;
    if (u == 0) return 32'd0;
    k = 0;
    for (int i = 0; i < 24; i++) if (u[i]) k = i;
    n = u << (23 - k);
    return {1'b0, 8'(127 + k - int'(shift)), n[22:0]};
  endfunction

endpackage

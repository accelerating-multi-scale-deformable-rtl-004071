// tb_fp_pkg: reference FP32 conversions for the testbenches, written with
// real arithmetic independently of the RTL. to_real decodes single-precision
// bits; to_fp32 rounds a real to the nearest single-precision value (ties to
// even, results below the normal range flushed to zero, as the RTL does).
package tb_fp_pkg;
  function automatic real to_real(logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    if (e >= 0) for (int i = 0; i < e; i++) m = m * 2.0;
    else        for (int i = 0; i < -e; i++) m = m / 2.0;
    return f[31] ? -m : m;
  endfunction

  function automatic logic [31:0] to_fp32(real x);
    logic s;
    real  ax, sc, fr;
    int   e;
    longint r;
    if (x == 0.0) return 32'd0;
    s  = (x < 0.0);
    ax = s ? -x : x;
    e  = 0;
    while (ax >= 2.0) begin ax = ax / 2.0; e++; end
    while (ax < 1.0)  begin ax = ax * 2.0; e--; end
    sc = ax * 8388608.0;
    r  = longint'($floor(sc));
    fr = sc - real'(r);
    if (fr > 0.5 || (fr == 0.5 && r[0])) r++;
    if (r == 64'd16777216) begin r = 64'd8388608; e++; end
    if (e + 127 <= 0)   return {s, 31'd0};
    if (e + 127 >= 255) return {s, 8'hff, 23'd0};
    return {s, 8'(e + 127), r[22:0]};
  endfunction

  // |a-b| within rel * max(|a|,|b|) + abs_tol
  function automatic bit close(real a, real b, real rel, real abs_tol);
    real d, m;
    d = (a > b) ? a - b : b - a;
    m = (a < 0 ? -a : a);
    if ((b < 0 ? -b : b) > m) m = (b < 0 ? -b : b);
    return d <= rel * m + abs_tol;
  endfunction

  // Initial content of every modelled bank: a value in [-3.75, 3.75] in steps
  // of 1/8, exact in FP32, that depends on the bank id, burst address and lane.
  function automatic real pat_real(int id, int addr, int lane);
    return real'(((id * 37 + addr * 11 + lane * 5) % 61) - 30) / 8.0;
  endfunction
  function automatic logic [31:0] pat(int id, int addr, int lane);
    return to_fp32(pat_real(id, addr, lane));
  endfunction

  // Reference bilinear interpolation of lane `lane`, burst b, of the vector
  // stored row-major (nb bursts per pixel) from burst address base in bank id,
  // sampled at (px+dx, py+dy) in fixed point with 8 fraction bits; pixels
  // outside the w x h tile count as zero.
  function automatic real bi_ref(int id, int px, int py, int dx, int dy, int w, int h,
                                 int base, int nb, int b, int lane);
    real x, y, fx, fy, acc, wt;
    int  x0, y0, xi, yi;
    x  = real'(px + dx) / 256.0;
    y  = real'(py + dy) / 256.0;
    x0 = int'($floor(x));
    y0 = int'($floor(y));
    fx = x - real'(x0);
    fy = y - real'(y0);
    acc = 0.0;
    for (int k = 0; k < 4; k++) begin
      xi = x0 + (k % 2);
      yi = y0 + (k / 2);
      wt = ((k % 2) ? fx : 1.0 - fx) * ((k / 2) ? fy : 1.0 - fy);
      if (xi >= 0 && xi < w && yi >= 0 && yi < h)
        acc += wt * pat_real(id, base + (yi * w + xi) * nb + b, lane);
    end
    return acc;
  endfunction

  // Instruction and address builders (Daddr = RA | BG | BA | ROW | COL).
  function automatic logic [31:0] mk_daddr(int ra, int bg, int ba, int burst);
    return {1'(ra), 3'(bg), 2'(ba), 16'(burst >> danmp_pkg::COLW), 10'(burst % (1 << danmp_pkg::COLW))};
  endfunction
  function automatic danmp_pkg::nmp_inst_t mk_inst(danmp_pkg::nmp_se_e se, danmp_pkg::opcode_e op,
      logic [31:0] daddr, int vsize, logic [31:0] w, int tag);
    danmp_pkg::nmp_inst_t i;
    i = '0;
    i.mode_se  = danmp_pkg::MODE_NMP;
    i.nmp_se   = se;
    i.op       = op;
    i.daddr    = daddr;
    i.vsize    = 3'(vsize);
    i.w_value  = w;
    i.psum_tag = 4'(tag);
    return i;
  endfunction
  // Sampling record: lanes px, py, dx, dy, w, h, base (coordinates with 8 fraction bits).
  function automatic logic [danmp_pkg::DW-1:0] mk_rec(int px, int py, int dx, int dy, int w, int h, int base);
    return {32'd0, 32'(base), 32'(h), 32'(w), 32'(dy), 32'(dx), 32'(py), 32'(px)};
  endfunction
endpackage

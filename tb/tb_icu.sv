// tb_icu: self-checking test of the Index Computation Unit. Random reference
// points, offsets and tile sizes (including positions outside and on the edge
// of the tile) are checked against fractions, in-bounds flags and clamped
// pixel indices worked out here with real-number floor arithmetic.
module tb_icu;
  logic signed [31:0] px, py, dx, dy;
  logic [15:0] w, h;
  logic [7:0]  fx, fy;
  logic [3:0]  nvalid;
  logic [3:0][31:0] idx;
  int checks = 0, failures = 0;

  icu #(.FRAC(8)) dut (.*);

  function automatic int clampi(int v, int lim);
    return v < 0 ? 0 : (v >= lim ? lim - 1 : v);
  endfunction

  initial begin
    for (int i = 0; i < 5000; i++) begin
      int x0, y0, xi, yi, efx, efy;
      bit v;
      w  = 16'(1 + $urandom % 40);
      h  = 16'(1 + $urandom % 40);
      px = $signed(($urandom % (int'(w) * 256 + 1024))) - 512;
      py = $signed(($urandom % (int'(h) * 256 + 1024))) - 512;
      dx = $signed($urandom % 2048) - 1024;
      dy = $signed($urandom % 2048) - 1024;
      #1;
      x0  = int'($floor(real'(px + dx) / 256.0));
      y0  = int'($floor(real'(py + dy) / 256.0));
      efx = (px + dx) - x0 * 256;
      efy = (py + dy) - y0 * 256;
      checks++;
      if (fx != 8'(efx) || fy != 8'(efy)) begin
        failures++; $display("FAIL frac %0d %0d", fx, fy);
      end
      for (int k = 0; k < 4; k++) begin
        xi = x0 + k % 2;
        yi = y0 + k / 2;
        v  = xi >= 0 && xi < int'(w) && yi >= 0 && yi < int'(h);
        checks++;
        if (nvalid[k] != v || idx[k] != 32'(clampi(yi, int'(h)) * int'(w) + clampi(xi, int'(w)))) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d nv=%b idx=%0d", k, nvalid[k], idx[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

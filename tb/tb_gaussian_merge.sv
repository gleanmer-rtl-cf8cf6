// tb_gaussian_merge: self-checking test of the Gaussian Merge Unit. Two random point sets are
// turned into sufficient statistics here; merging them must give exactly the statistics of the
// union of the points (count, sums, second moments, bounding box, column span).
module tb_gaussian_merge;
  import gleanmer_pkg::*;
  pstats_t a, b, m, e;
  int checks = 0, failures = 0;

  gaussian_merge dut (.a(a), .b(b), .m(m));

  function automatic pstats_t stats_of(int np, int c0, ref int px[], ref int py[], ref int pz[], input int off);
    pstats_t s = '0;
    for (int i = 0; i < np; i++) begin
      int x = px[off+i], y = py[off+i], z = pz[off+i];
      if (i == 0) begin
        s.box.lo.x = coord_t'(x); s.box.lo.y = coord_t'(y); s.box.lo.z = coord_t'(z);
        s.box.hi = s.box.lo;
      end
      if (x < int'(s.box.lo.x)) s.box.lo.x = coord_t'(x);
      if (y < int'(s.box.lo.y)) s.box.lo.y = coord_t'(y);
      if (z < int'(s.box.lo.z)) s.box.lo.z = coord_t'(z);
      if (x > int'(s.box.hi.x)) s.box.hi.x = coord_t'(x);
      if (y > int'(s.box.hi.y)) s.box.hi.y = coord_t'(y);
      if (z > int'(s.box.hi.z)) s.box.hi.z = coord_t'(z);
      s.n = s.n + 1;
      s.sum[2] += SUM_W'(x); s.sum[1] += SUM_W'(y); s.sum[0] += SUM_W'(z);
      s.sumsq[0] += SUMSQ_W'(longint'(x) * x); s.sumsq[1] += SUMSQ_W'(longint'(x) * y);
      s.sumsq[2] += SUMSQ_W'(longint'(x) * z); s.sumsq[3] += SUMSQ_W'(longint'(y) * y);
      s.sumsq[4] += SUMSQ_W'(longint'(y) * z); s.sumsq[5] += SUMSQ_W'(longint'(z) * z);
    end
    s.col_s = 10'(c0); s.col_e = 10'(c0 + np - 1);
    return s;
  endfunction

  initial begin
    int px[], py[], pz[];
    for (int n = 0; n < 300; n++) begin
      int na, nb, ca, cb;
      na = $urandom_range(1, 20); nb = $urandom_range(1, 20);
      ca = $urandom_range(0, 500); cb = $urandom_range(0, 500);
      px = new[na + nb]; py = new[na + nb]; pz = new[na + nb];
      for (int i = 0; i < na + nb; i++) begin
        px[i] = $urandom_range(0, 100000) - 50000;
        py[i] = $urandom_range(0, 100000) - 50000;
        pz[i] = $urandom_range(0, 200000);
      end
      a = stats_of(na, ca, px, py, pz, 0);
      b = stats_of(nb, cb, px, py, pz, na);
      e = stats_of(na + nb, 0, px, py, pz, 0);
      e.col_s = 10'(ca < cb ? ca : cb);
      e.col_e = 10'((ca + na - 1) > (cb + nb - 1) ? (ca + na - 1) : (cb + nb - 1));
      #1;
      checks++;
      if (m !== e) begin
        failures++;
        if (failures < 4) $display("mismatch n=%0d: got n=%0d exp n=%0d", n, m.n, e.n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

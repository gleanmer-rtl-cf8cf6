// tb_segment_fusion: self-checking test of the Segment Fusion Unit.
// Frame 1 (three rows) exercises the three outcomes of the row-to-row matching: a segment that
// continues an open Gaussian (merged twice, over three rows), a segment that overlaps in
// columns but is too far in depth (a new Gaussian, the old one closes at the row end), and a
// segment with no overlap. The expected closed Gaussians, in output order, are built here by
// adding the statistics of the segments. Frame 2 is one row of 70 single-column segments, more
// than the 62 a buffer half holds: the last 8 must come out at once as overflow, then the 62
// stored ones at the frame end. Output back-pressure is random throughout.
module tb_segment_fusion;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0;
  coord_t fuse_thr = 19'sd50;
  logic in_valid = 0, in_seg_valid = 0, in_row_end = 0, in_frame_end = 0, in_ready;
  pstats_t in_seg;
  logic out_valid, out_ready = 0;
  pstats_t out_g;
  logic [31:0] overflow_cnt, merge_cnt;
  int checks = 0, failures = 0, n_out = 0;
  pstats_t exp_q [$];

  segment_fusion dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic pstats_t mk(int cs, int ce, int z, int y);
    pstats_t s = '0;
    for (int u = cs; u <= ce; u++) begin
      longint x = u * 4, zz = z + (u - cs);
      s.n += 1;
      s.sum[2] += SUM_W'(x); s.sum[1] += SUM_W'(longint'(y)); s.sum[0] += SUM_W'(zz);
      s.sumsq[0] += SUMSQ_W'(x * x); s.sumsq[1] += SUMSQ_W'(x * y); s.sumsq[2] += SUMSQ_W'(x * zz);
      s.sumsq[3] += SUMSQ_W'(longint'(y) * y); s.sumsq[4] += SUMSQ_W'(y * zz); s.sumsq[5] += SUMSQ_W'(zz * zz);
    end
    s.col_s = 10'(cs); s.col_e = 10'(ce);
    s.box.lo.x = coord_t'(cs * 4); s.box.hi.x = coord_t'(ce * 4);
    s.box.lo.y = coord_t'(y); s.box.hi.y = coord_t'(y);
    s.box.lo.z = coord_t'(z); s.box.hi.z = coord_t'(z + ce - cs);
    return s;
  endfunction

  function automatic pstats_t add(pstats_t a, pstats_t b);
    pstats_t m = a;
    m.n = a.n + b.n;
    for (int i = 0; i < 3; i++) m.sum[i] = a.sum[i] + b.sum[i];
    for (int i = 0; i < 6; i++) m.sumsq[i] = a.sumsq[i] + b.sumsq[i];
    m.col_s = (a.col_s < b.col_s) ? a.col_s : b.col_s;
    m.col_e = (a.col_e > b.col_e) ? a.col_e : b.col_e;
    m.box.lo.x = (a.box.lo.x < b.box.lo.x) ? a.box.lo.x : b.box.lo.x;
    m.box.lo.y = (a.box.lo.y < b.box.lo.y) ? a.box.lo.y : b.box.lo.y;
    m.box.lo.z = (a.box.lo.z < b.box.lo.z) ? a.box.lo.z : b.box.lo.z;
    m.box.hi.x = (a.box.hi.x > b.box.hi.x) ? a.box.hi.x : b.box.hi.x;
    m.box.hi.y = (a.box.hi.y > b.box.hi.y) ? a.box.hi.y : b.box.hi.y;
    m.box.hi.z = (a.box.hi.z > b.box.hi.z) ? a.box.hi.z : b.box.hi.z;
    return m;
  endfunction

  task automatic send(bit sv, pstats_t s, bit re, bit fe);
    @(negedge clk);
    in_valid = 1; in_seg_valid = sv; in_seg = s; in_row_end = re; in_frame_end = fe;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    pstats_t e;
    checks++;
    n_out++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = exp_q.pop_front();
      if (out_g !== e) begin
        failures++;
        $display("out %0d: got cols %0d-%0d n=%0d, exp cols %0d-%0d n=%0d", n_out, out_g.col_s, out_g.col_e, out_g.n, e.col_s, e.col_e, e.n);
      end
    end
  end

  initial begin
    pstats_t a0, b0, a1, c1, b1, a2;
    in_seg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    a0 = mk(0, 9, 1000, 0);   b0 = mk(20, 29, 2000, 0);
    a1 = mk(2, 11, 1005, 1);  c1 = mk(15, 18, 3000, 1);  b1 = mk(22, 28, 2600, 1);
    a2 = mk(3, 12, 1008, 2);
    exp_q.push_back(b0);
    exp_q.push_back(c1);
    exp_q.push_back(b1);
    exp_q.push_back(add(add(a0, a1), a2));
    send(1, a0, 0, 0); send(1, b0, 0, 0); send(0, '0, 1, 0);
    send(1, a1, 0, 0); send(1, c1, 0, 0); send(1, b1, 1, 0);
    send(1, a2, 1, 1);
    repeat (50) @(negedge clk);
    checks += 3;
    if (exp_q.size() != 0) failures++;
    if (merge_cnt != 2) begin failures++; $display("merges %0d", merge_cnt); end
    if (overflow_cnt != 0) failures++;
    // frame 2: overflow of one buffer half
    for (int i = 62; i < 70; i++) exp_q.push_back(mk(2 * i, 2 * i, 1000 + 100 * i, 0));
    for (int i = 0; i < 62; i++) exp_q.push_back(mk(2 * i, 2 * i, 1000 + 100 * i, 0));
    for (int i = 0; i < 70; i++) send(1, mk(2 * i, 2 * i, 1000 + 100 * i, 0), i == 69, i == 69);
    repeat (400) @(negedge clk);
    checks += 2;
    if (exp_q.size() != 0) begin failures++; $display("%0d missing", exp_q.size()); end
    if (overflow_cnt != 8) begin failures++; $display("overflow %0d", overflow_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

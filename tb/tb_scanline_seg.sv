// tb_scanline_seg: self-checking test of the Scanline Segmentation Unit.
// Each 64-pixel row of the synthetic scene holds a flat wall (columns 0-15), a farther flat
// wall (16-31), four invalid pixels (32-35) and a steep planar surface z = z0 + 6x (36-63)
// whose depth grows by 20 to 45 units per pixel, more than the 16-unit proximity threshold, so
// it stays one segment only if the fed-back slope is used. Expected segments (column span,
// count, sums, bounding box) are computed here from the back-projection formula. Checks: the
// segments and row/frame markers of two frames (the second with random output back-pressure),
// and that a row takes 65 cycles (one pixel per cycle plus one flush cycle).
module tb_scanline_seg;
  import gleanmer_pkg::*;
  localparam int IW = 64, IH = 3;
  logic clk = 0, rst_n = 0;
  gm_cfg_t cfg;
  logic in_valid = 0, in_eol = 0, in_eof = 0, in_ready;
  coord_t in_depth = 0;
  logic [9:0] in_col = 0, in_row = 0;
  logic out_valid, out_seg_valid, out_row_end, out_frame_end, out_ready = 1;
  pstats_t out_seg;
  int checks = 0, failures = 0;
  bit rand_ready = 0;

  typedef struct { int cs, ce, row; bit last_of_row, frame; } item_t;
  item_t exp_q [$];
  int depth_of [IW];
  int re_cycles [$];
  int cyc = 0;

  scanline_seg dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic pstats_t expect_seg(int cs, int ce, int row);
    pstats_t s = '0;
    for (int u = cs; u <= ce; u++) begin
      longint d = depth_of[u];
      longint x = ((longint'(u) - 32) * d * 33554) >>> 24;
      longint y = ((longint'(row) - 1) * d * 33554) >>> 24;
      if (u == cs) begin
        s.box.lo.x = coord_t'(x); s.box.lo.y = coord_t'(y); s.box.lo.z = coord_t'(d);
        s.box.hi = s.box.lo;
      end
      if (x < s.box.lo.x) s.box.lo.x = coord_t'(x);
      if (y < s.box.lo.y) s.box.lo.y = coord_t'(y);
      if (d < s.box.lo.z) s.box.lo.z = coord_t'(d);
      if (x > s.box.hi.x) s.box.hi.x = coord_t'(x);
      if (y > s.box.hi.y) s.box.hi.y = coord_t'(y);
      if (d > s.box.hi.z) s.box.hi.z = coord_t'(d);
      s.n += 1;
      s.sum[2] += SUM_W'(x); s.sum[1] += SUM_W'(y); s.sum[0] += SUM_W'(d);
      s.sumsq[0] += SUMSQ_W'(x * x); s.sumsq[1] += SUMSQ_W'(x * y); s.sumsq[2] += SUMSQ_W'(x * d);
      s.sumsq[3] += SUMSQ_W'(y * y); s.sumsq[4] += SUMSQ_W'(y * d); s.sumsq[5] += SUMSQ_W'(d * d);
    end
    s.col_s = 10'(cs); s.col_e = 10'(ce);
    return s;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (out_seg_valid) begin
      item_t it;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected segment %0d-%0d", out_seg.col_s, out_seg.col_e);
      end else begin
        it = exp_q.pop_front();
        if (out_seg !== expect_seg(it.cs, it.ce, it.row)) begin
          failures++;
          $display("row %0d seg exp %0d-%0d got %0d-%0d n=%0d", it.row, it.cs, it.ce, out_seg.col_s, out_seg.col_e, out_seg.n);
        end
        checks++;
        if (out_row_end != it.last_of_row || out_frame_end != (it.last_of_row && it.frame)) failures++;
      end
    end else begin
      checks++;
      if (!out_row_end) failures++;
    end
    if (out_row_end) re_cycles.push_back(cyc);
  end
  always @(negedge clk) if (rand_ready) out_ready <= ($urandom_range(0, 2) != 0);

  task automatic send_frame();
    for (int v = 0; v < IH; v++) begin
      exp_q.push_back('{0, 15, v, 0, 0});
      exp_q.push_back('{16, 31, v, 0, 0});
      exp_q.push_back('{36, 63, v, 1, v == IH - 1});
      for (int u = 0; u < IW; u++) begin
        @(negedge clk);
        in_valid = 1; in_col = 10'(u); in_row = 10'(v); in_depth = coord_t'(depth_of[u]);
        in_eol = (u == IW - 1); in_eof = (u == IW - 1) && (v == IH - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    end
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    cfg = '0;
    cfg.cx = 10'd32; cfg.cy = 10'd1;
    cfg.inv_fx = 32'd33554; cfg.inv_fy = 32'd33554;   // f = 500 pixels
    cfg.seg_thr = 19'sd16; cfg.seg_min_pts = 8'd2;
    for (int u = 0; u < IW; u++) begin
      if (u < 16) depth_of[u] = 1000;
      else if (u < 32) depth_of[u] = 2000;
      else if (u < 36) depth_of[u] = 0;
      else depth_of[u] = int'($floor(1500.0 / (1.0 - 6.0 * (u - 32) / 500.0) + 0.5));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    send_frame();
    repeat (20) @(negedge clk);
    checks++;
    if (re_cycles.size() != IH) failures++;
    else for (int i = 1; i < IH; i++) begin
      checks++;
      if (re_cycles[i] - re_cycles[i-1] != IW + 1) begin
        failures++; $display("row period %0d", re_cycles[i] - re_cycles[i-1]);
      end
    end
    rand_ready = 1;
    send_frame();
    repeat (100) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d segments missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

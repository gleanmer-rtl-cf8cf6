// scanline_seg: Scanline Segmentation (SS) Unit.
//
// Splits each image row into line segments, one per obstacle surface crossed by the row, at one
// pixel per clock. The four steps of the unit follow the paper's signal-flow description:
//   1. back-projection: pixel (col u, row v, depth d) -> camera-frame point
//      x = (u-cx)*d/fx, y = (v-cy)*d/fy, z = d (1/f given as Q8.24 constants);
//   2. proximity test: the point belongs to the current segment if its depth is within seg_thr
//      of the depth predicted by extending the segment along its slope dz/dx from the segment's
//      last point;
//   3. update: a belonging point is added to the segment's statistics (count, sums, second
//      moments, bounding box); otherwise the current segment is output and a new one starts at
//      the point;
//   4. slope: dz/dx between the first and last point of the segment is computed by a four-stage
//      pipelined divider. Stage 2 does not wait for it: it uses the slope that leaves the
//      divider now, i.e. the slope of the segment as it was four cycles earlier. This is the
//      paper's single-cycle slope approximation that removes the need to interleave four rows.
// The slope is only used if it was computed for the same segment from at least two points;
// otherwise (a segment younger than four cycles) the test assumes slope 0 and accepts a depth
// step of up to 4*seg_thr from the last point, so that steep surfaces can start a segment.
// That fallback, the x-z form of the test, the fixed threshold and the statistics kept per
// segment are this design's own choices.
//
// An invalid pixel (depth 0) closes the current segment. Segments with fewer than seg_min_pts
// points are dropped. At the last pixel of a row the unit spends one extra cycle to flush the
// open segment and emit a row_end marker (frame_end as well after the last row), so a
// 640-pixel row takes 641 cycles. Output items carry seg_valid and/or row_end; the whole
// pipeline stalls while an item waits for out_ready.
module scanline_seg
  import gleanmer_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  gm_cfg_t    cfg,
  input  logic       in_valid,
  input  coord_t     in_depth,
  input  logic [9:0] in_col,
  input  logic [9:0] in_row,
  input  logic       in_eol,
  input  logic       in_eof,
  output logic       in_ready,
  output logic       out_valid,
  output logic       out_seg_valid,
  output pstats_t    out_seg,
  output logic       out_row_end,
  output logic       out_frame_end,
  input  logic       out_ready
);
  localparam int unsigned DIV_STAGES = 4;
  localparam int unsigned NUM_W      = COORD_W + 1 + 16;       // |dz| << 16
  localparam int unsigned BITS_PER   = NUM_W / DIV_STAGES;     // 9

  // ---------------- stage 1: back-projection ----------------
  logic       p1_valid, p1_pix_ok, p1_eol, p1_eof;
  logic [9:0] p1_col;
  vec3_t      p1_pt;

  logic signed [11:0] du, dv;
  logic signed [63:0] px_full, py_full;
  always_comb begin
    du = $signed({2'b00, in_col}) - $signed({2'b00, cfg.cx});
    dv = $signed({2'b00, in_row}) - $signed({2'b00, cfg.cy});
    px_full = (64'(du) * 64'(in_depth) * $signed({32'd0, cfg.inv_fx})) >>> 24;
    py_full = (64'(dv) * 64'(in_depth) * $signed({32'd0, cfg.inv_fy})) >>> 24;
  end

  // ---------------- stages 2/3: segment state ----------------
  logic    adv, flush, flush_eof, consume_p1;
  logic    seg_act;
  pstats_t seg;
  coord_t  x0, z0, xl, zl;
  logic [7:0] seg_id;

  // slope feedback from stage 4
  logic              fb_ok;
  logic [7:0]        fb_id;
  logic signed [31:0] fb_slope;
  logic signed [31:0] slope_use;

  assign adv        = !out_valid || out_ready;
  assign consume_p1 = adv && !flush;
  assign in_ready   = !p1_valid || consume_p1;

  // point statistics of the stage-1 point
  pstats_t pt_stats, merged;
  always_comb begin
    pt_stats        = '0;
    pt_stats.col_s  = p1_col;
    pt_stats.col_e  = p1_col;
    pt_stats.n      = N_W'(1);
    pt_stats.sum[2] = SUM_W'(p1_pt.x);
    pt_stats.sum[1] = SUM_W'(p1_pt.y);
    pt_stats.sum[0] = SUM_W'(p1_pt.z);
    pt_stats.sumsq[0] = SUMSQ_W'(p1_pt.x * p1_pt.x);
    pt_stats.sumsq[1] = SUMSQ_W'(p1_pt.x * p1_pt.y);
    pt_stats.sumsq[2] = SUMSQ_W'(p1_pt.x * p1_pt.z);
    pt_stats.sumsq[3] = SUMSQ_W'(p1_pt.y * p1_pt.y);
    pt_stats.sumsq[4] = SUMSQ_W'(p1_pt.y * p1_pt.z);
    pt_stats.sumsq[5] = SUMSQ_W'(p1_pt.z * p1_pt.z);
    pt_stats.box.lo = p1_pt;
    pt_stats.box.hi = p1_pt;
  end

  gaussian_merge u_merge (.a(seg), .b(pt_stats), .m(merged));

  // proximity test (stage 2)
  logic signed [63:0] pred_full;
  logic signed [31:0] err;
  logic               close, slope_ok;
  logic signed [31:0] thr_use;
  always_comb begin
    slope_ok  = fb_ok && (fb_id == seg_id);
    slope_use = slope_ok ? fb_slope : 32'sd0;
    thr_use   = slope_ok ? 32'(cfg.seg_thr) : (32'(cfg.seg_thr) <<< 2);
    pred_full = 64'(zl) + ((64'(slope_use) * (64'(p1_pt.x) - 64'(xl))) >>> 16);
    err       = 32'(64'(p1_pt.z) - pred_full);
    if (pred_full > 64'sd2147483647 || pred_full < -64'sd2147483647) err = 32'sh7fffffff;
    close     = seg_act && p1_pix_ok && ((err < 0 ? -err : err) <= thr_use);
  end

  logic keep_seg;
  assign keep_seg = seg_act && (seg.n >= N_W'(cfg.seg_min_pts));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_valid <= 1'b0; p1_pix_ok <= 1'b0; p1_eol <= 1'b0; p1_eof <= 1'b0;
      p1_col <= '0; p1_pt <= '0;
      seg_act <= 1'b0; seg <= '0; seg_id <= '0;
      x0 <= '0; z0 <= '0; xl <= '0; zl <= '0;
      flush <= 1'b0; flush_eof <= 1'b0;
      out_valid <= 1'b0; out_seg_valid <= 1'b0; out_seg <= '0;
      out_row_end <= 1'b0; out_frame_end <= 1'b0;
    end else begin
      // stage 1 register
      if (in_ready) begin
        p1_valid  <= in_valid;
        if (in_valid) begin
          p1_pix_ok <= (in_depth > 0);
          p1_eol    <= in_eol;
          p1_eof    <= in_eof;
          p1_col    <= in_col;
          p1_pt.x   <= coord_t'(px_full);
          p1_pt.y   <= coord_t'(py_full);
          p1_pt.z   <= in_depth;
        end
      end
      // stages 2/3
      if (adv) begin
        out_valid     <= 1'b0;
        out_seg_valid <= 1'b0;
        out_row_end   <= 1'b0;
        out_frame_end <= 1'b0;
        if (flush) begin
          out_valid     <= 1'b1;
          out_seg_valid <= keep_seg;
          out_seg       <= seg;
          out_row_end   <= 1'b1;
          out_frame_end <= flush_eof;
          seg_act       <= 1'b0;
          flush         <= 1'b0;
        end else if (p1_valid) begin
          if (p1_eol) flush <= 1'b1;
          flush_eof <= p1_eof;
          if (close) begin
            seg <= merged;
            xl  <= p1_pt.x;
            zl  <= p1_pt.z;
          end else begin
            if (keep_seg) begin
              out_valid     <= 1'b1;
              out_seg_valid <= 1'b1;
              out_seg       <= seg;
            end
            seg_act <= p1_pix_ok;
            seg     <= pt_stats;
            seg_id  <= seg_id + 1'b1;
            x0 <= p1_pt.x; z0 <= p1_pt.z;
            xl <= p1_pt.x; zl <= p1_pt.z;
          end
        end
      end
    end
  end

  // ---------------- stage 4: four-cycle slope divider ----------------
  typedef struct packed {
    logic              ok;
    logic [7:0]        id;
    logic              neg;
    logic [NUM_W-1:0]  num;
    logic [NUM_W-1:0]  rem;
    logic [NUM_W-1:0]  quo;
    logic [COORD_W:0]  den;
  } div_t;
  div_t ds [DIV_STAGES];
  div_t d_in;

  always_comb begin
    logic signed [COORD_W:0] ddx, ddz;
    ddx = (COORD_W+1)'(xl) - (COORD_W+1)'(x0);
    ddz = (COORD_W+1)'(zl) - (COORD_W+1)'(z0);
    d_in     = '0;
    d_in.ok  = seg_act && (seg.n >= N_W'(2)) && (ddx != 0);
    d_in.id  = seg_id;
    d_in.neg = ddx[COORD_W] ^ ddz[COORD_W];
    d_in.num = NUM_W'(ddz[COORD_W] ? (COORD_W+1)'(-ddz) : ddz) << 16;
    d_in.den = ddx[COORD_W] ? -ddx : ddx;
  end

  function automatic div_t div_step(div_t d);
    div_t r = d;
    for (int i = 0; i < BITS_PER; i++) begin
      r.rem = {r.rem[NUM_W-2:0], r.num[NUM_W-1]};
      r.num = {r.num[NUM_W-2:0], 1'b0};
      if (r.rem >= NUM_W'(r.den)) begin
        r.rem = r.rem - NUM_W'(r.den);
        r.quo = {r.quo[NUM_W-2:0], 1'b1};
      end else begin
        r.quo = {r.quo[NUM_W-2:0], 1'b0};
      end
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < DIV_STAGES; s++) ds[s] <= '0;
    end else if (adv) begin
      ds[0] <= div_step(d_in);
      for (int s = 1; s < DIV_STAGES; s++) ds[s] <= div_step(ds[s-1]);
    end
  end

  always_comb begin
    logic [NUM_W-1:0] q;
    q        = ds[DIV_STAGES-1].quo;
    fb_ok    = ds[DIV_STAGES-1].ok;
    fb_id    = ds[DIV_STAGES-1].id;
    if (q > NUM_W'(32'h7fffffff)) q = NUM_W'(32'h7fffffff);
    fb_slope = ds[DIV_STAGES-1].neg ? -$signed(32'(q)) : $signed(32'(q));
  end
endmodule

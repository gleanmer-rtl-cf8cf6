// tb_gleanmer_top: end-to-end testbench of gleanmer_top at a reduced image size.
//
// One complete operation of the accelerator. The CPU manager port writes a small global map
// into the global buffer over the AXI-4 bus: sixteen Gaussians on a 4x4 grid (4 m apart, 0.5 m
// standard deviation; the left half occupied, the right half free) indexed by a two-level
// R-tree (a root node and four leaf nodes). A depth frame of 64x96 pixels is then streamed
// through the construction path; its rows cycle through four patterns: a flat wall, the same
// wall again (fused with the row above), alternating near and far pixels (one-pixel segments,
// more than the line segment buffer holds) and a row that starts with invalid pixels. A second,
// smooth frame (one flat wall) must pass at the segmentation rate of IMG_W + 1 cycles per row,
// which at 640x480 and 125 MHz is 406 frames/s, above the 88 frames/s minimum. Then four
// query batches run: sixteen coordinates next to the Gaussians, a short batch far from the map
// (ended early with q_last), the first batch again (served from the cache) and once more after
// a cache invalidation, with the CPU reading the buffer at the same time. Finally the map-update
// port writes and reads a line through the write-through cache and the allocator is exercised.
//
// Checked: every valid pixel ends up in exactly one local occupied Gaussian (point counts),
// every occupied Gaussian yields n_samples free bases stored or dropped, probabilities near
// occupied / free Gaussians and far from the map, node visits, fetch counts, AXI decode errors,
// write-through visibility, allocator pointers. Mechanisms counted (each must happen): depth input
// back-pressure, segmentation stall, segment fusion merge and overflow, free-basis drop, cache
// hit and miss, bus contention between the CPU and the cache, decode error, early batch end,
// allocator reuse and free/alloc bypass.
module tb_gleanmer_top;
  import gleanmer_pkg::*;
  localparam int IW = 64;
  localparam int IH = 96;
  localparam int NS = 16;          // samples per occupied Gaussian

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  gm_cfg_t cfg;
  logic pix_valid = 0, pix_ready;
  logic [15:0] pix_raw = 0;
  logic smp_we = 0;
  logic [7:0] smp_addr = 0;
  sample_t smp_wdata = '0;
  logic occ_valid;
  pstats_t occ_g;
  logic fb_clear = 0, fb_re = 0;
  logic [9:0] fb_raddr = 0;
  free_basis_t fb_rdata;
  logic [10:0] fb_count;
  logic q_valid = 0, q_last = 0, q_ready;
  vec3_t q_coord = '0;
  logic res_valid, res_ready = 1;
  logic [3:0] res_slot;
  logic [15:0] res_prob;
  axi_req_t cpu_req;
  axi_rsp_t cpu_rsp;
  logic mu_valid = 0, mu_we = 0, mu_ready, mu_resp_valid;
  ptr_t mu_addr = '0;
  logic [LINE_W-1:0] mu_wdata = '0, mu_resp_rdata;
  logic cache_inv = 0;
  logic alloc_req = 0, alloc_ok, free_req = 0;
  ptr_t alloc_ptr, free_ptr = '0;
  gm_status_t status;

  gleanmer_top #(.IMG_W(IW), .IMG_H(IH)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .pix_valid(pix_valid), .pix_raw(pix_raw), .pix_ready(pix_ready),
    .smp_we(smp_we), .smp_addr(smp_addr), .smp_wdata(smp_wdata),
    .occ_valid(occ_valid), .occ_g(occ_g),
    .fb_clear(fb_clear), .fb_re(fb_re), .fb_raddr(fb_raddr), .fb_rdata(fb_rdata), .fb_count(fb_count),
    .q_valid(q_valid), .q_coord(q_coord), .q_last(q_last), .q_ready(q_ready),
    .res_valid(res_valid), .res_slot(res_slot), .res_prob(res_prob), .res_ready(res_ready),
    .cpu_axi_req(cpu_req), .cpu_axi_rsp(cpu_rsp),
    .mu_valid(mu_valid), .mu_we(mu_we), .mu_addr(mu_addr), .mu_wdata(mu_wdata), .mu_ready(mu_ready),
    .mu_resp_valid(mu_resp_valid), .mu_resp_rdata(mu_resp_rdata), .cache_inv(cache_inv),
    .alloc_req(alloc_req), .alloc_ptr(alloc_ptr), .alloc_ok(alloc_ok),
    .free_req(free_req), .free_ptr(free_ptr), .status(status)
  );

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_pix_bp = 0, n_ss_stall = 0, n_bus_conflict = 0, n_decerr = 0, n_early = 0;
  int n_reuse = 0, n_bypass = 0, n_occ = 0;
  longint occ_points = 0;
  always @(posedge clk) if (rst_n) begin
    if (pix_valid && !pix_ready) n_pix_bp++;
    if (dut.u_ss.out_valid && !dut.u_ss.out_ready) n_ss_stall++;
    if ((cpu_req.ar_valid || cpu_req.aw_valid) && (dut.m_req[1].ar_valid || dut.m_req[1].aw_valid))
      n_bus_conflict++;
    if (occ_valid) begin n_occ++; occ_points += longint'(occ_g.n); end
  end

  // ---------------- CPU AXI manager ----------------
  task automatic axi_write(input logic [31:0] addr, input logic [LINE_W-1:0] d, output logic [1:0] resp);
    @(negedge clk);
    cpu_req.aw_valid = 1; cpu_req.aw_addr = addr; cpu_req.w_valid = 1; cpu_req.w_data = d;
    cpu_req.w_strb = '1; cpu_req.b_ready = 1;
    fork
      begin @(posedge clk); while (!cpu_rsp.aw_ready) @(posedge clk); @(negedge clk); cpu_req.aw_valid = 0; end
      begin @(posedge clk); while (!cpu_rsp.w_ready) @(posedge clk); @(negedge clk); cpu_req.w_valid = 0; end
    join
    do @(posedge clk); while (!cpu_rsp.b_valid);
    resp = cpu_rsp.b_resp;
    @(negedge clk); cpu_req.b_ready = 0;
  endtask

  task automatic axi_read(input logic [31:0] addr, output logic [LINE_W-1:0] d, output logic [1:0] resp);
    @(negedge clk);
    cpu_req.ar_valid = 1; cpu_req.ar_addr = addr; cpu_req.r_ready = 1;
    @(posedge clk); while (!cpu_rsp.ar_ready) @(posedge clk);
    @(negedge clk); cpu_req.ar_valid = 0;
    do @(posedge clk); while (!cpu_rsp.r_valid);
    d = cpu_rsp.r_data; resp = cpu_rsp.r_resp;
    @(negedge clk); cpu_req.r_ready = 0;
  endtask

  // ---------------- the map ----------------
  localparam int GP0 = 16;         // Gaussian records at lines 16..31, nodes at lines 1..5
  function automatic coord_t m2c(input int cm);   // centimetres to Q8 metres
    return coord_t'((cm * 256) / 100);
  endfunction
  function automatic gaussian_t map_g(input int i);
    gaussian_t g;
    g = '0;
    g.occ = (i % 4) < 2;
    g.weight = 16'hffff;
    g.mean.x = m2c((i % 4) * 400 - 600);
    g.mean.y = m2c((i / 4) * 400 - 600);
    g.mean.z = m2c(200);
    g.prec[0] = cov_t'(4 << COV_FRAC); g.prec[3] = cov_t'(4 << COV_FRAC); g.prec[5] = cov_t'(4 << COV_FRAC);
    return g;
  endfunction
  function automatic bbox_t g_box(input gaussian_t g);
    bbox_t b;
    b.lo.x = g.mean.x - m2c(150); b.lo.y = g.mean.y - m2c(150); b.lo.z = g.mean.z - m2c(150);
    b.hi.x = g.mean.x + m2c(150); b.hi.y = g.mean.y + m2c(150); b.hi.z = g.mean.z + m2c(150);
    return b;
  endfunction

  task automatic load_map();
    rt_node_t node;
    logic [1:0] resp;
    // leaf nodes 2..5: node k holds Gaussians of grid row k-2
    for (int k = 0; k < 4; k++) begin
      node = '0;
      for (int e = 0; e < 4; e++) begin
        node[e].box = g_box(map_g(k * 4 + e));
        node[e].leaf = 1'b1;
        node[e].ptr = ptr_t'(GP0 + k * 4 + e);
      end
      axi_write(32'((2 + k) * 64), LINE_W'(node), resp);
      chk(resp == AXI_OKAY, "map write");
    end
    node = '0;
    for (int k = 0; k < 4; k++) begin
      node[k].box.lo = g_box(map_g(k * 4)).lo;
      node[k].box.hi = g_box(map_g(k * 4 + 3)).hi;
      node[k].leaf = 1'b0;
      node[k].ptr = ptr_t'(2 + k);
    end
    axi_write(32'(1 * 64), LINE_W'(node), resp);
    chk(resp == AXI_OKAY, "root write");
    for (int i = 0; i < 16; i++) begin
      axi_write(32'((GP0 + i) * 64), gaussian_to_line(map_g(i)), resp);
      chk(resp == AXI_OKAY, "gaussian write");
    end
  endtask

  // ---------------- depth frame ----------------
  bit smooth = 0;
  function automatic logic [15:0] pixel(input int r, input int c);
    if (smooth) return 16'd1000;
    case (r % 4)
      0, 1: return 16'd1000;
      2: return (c % 2) ? 16'd3000 : 16'd1000;
      default: return (c < 16) ? 16'd0 : 16'd2000;
    endcase
  endfunction

  longint valid_pixels = 0;
  task automatic stream_frame();
    for (int r = 0; r < IH; r++)
      for (int c = 0; c < IW; c++) begin
        @(negedge clk);
        pix_valid = 1; pix_raw = pixel(r, c);
        if (pix_raw != 0) valid_pixels++;
        do @(posedge clk); while (!pix_ready);
      end
    @(negedge clk);
    pix_valid = 0;
  endtask

  task automatic wait_drain();
    int t;
    t = 0;
    while (t < 50) begin
      @(posedge clk);
      if (dut.dd_valid || dut.ss_valid || dut.sf_valid || occ_valid) t = 0; else t++;
    end
  endtask

  // ---------------- query batches ----------------
  int res_seen;
  logic [15:0] res_p [16];
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    res_p[res_slot] = res_prob;
    res_seen++;
  end

  task automatic run_batch(input int n, input bit near);
    vec3_t c [16];
    int t;
    for (int i = 0; i < n; i++) begin
      if (near) begin
        c[i] = map_g(i).mean;
        c[i].x = c[i].x + coord_t'($urandom_range(0, 20)) - coord_t'(10);
        c[i].y = c[i].y + coord_t'($urandom_range(0, 20)) - coord_t'(10);
      end else begin
        c[i].x = m2c(2000 + i * 10); c[i].y = m2c(2000); c[i].z = m2c(200);
      end
    end
    res_seen = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      q_valid = 1; q_coord = c[i]; q_last = (i == n - 1);
      do @(posedge clk); while (!q_ready);
    end
    @(negedge clk);
    q_valid = 0; q_last = 0;
    if (n < 16) n_early++;
    t = 0;
    while (res_seen < n && t < 100000) begin @(posedge clk); t++; end
    chk(res_seen == n, "all probabilities returned");
    for (int i = 0; i < n; i++) begin
      if (!near) chk(res_p[i] >= 16'h7f00 && res_p[i] <= 16'h8100, "far coordinate gives the prior 0.5");
      else if (map_g(i).occ) chk(res_p[i] > 16'hc000, "near occupied Gaussian is occupied");
      else chk(res_p[i] < 16'h4000, "near free Gaussian is free");
    end
  endtask

  // ---------------- main ----------------
  initial begin
    logic [1:0] resp;
    logic [LINE_W-1:0] d;
    logic [31:0] misses0, fetched0, batches0;
    bit cpu_bg;
    cpu_req = '0;
    cfg = '0;
    cfg.depth_scale = 16'h0100;
    cfg.cx = 10'(IW / 2); cfg.cy = 10'(IH / 2);
    cfg.inv_fx = 32'd33554; cfg.inv_fy = 32'd33554;   // f = 500 pixels, Q8.24
    cfg.seg_thr = coord_t'(16); cfg.seg_min_pts = 8'd1;
    cfg.fuse_thr = coord_t'(64);
    cfg.origin = '0;
    cfg.n_samples = 8'(NS);
    cfg.rt_root = ptr_t'(1);
    cfg.prior = 32'd1000;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    for (int k = 0; k < NS; k++) begin
      @(negedge clk);
      smp_we = 1; smp_addr = 8'(k);
      smp_wdata = '0; smp_wdata.fx = 8'($urandom); smp_wdata.fy = 8'($urandom); smp_wdata.fz = 8'($urandom);
    end
    @(negedge clk) smp_we = 0;

    load_map();
    axi_write(32'h8000_0000, '0, resp);
    chk(resp == AXI_DECERR, "unmapped write is a decode error");
    if (resp == AXI_DECERR) n_decerr++;
    axi_read(32'h8000_0040, d, resp);
    chk(resp == AXI_DECERR, "unmapped read is a decode error");
    if (resp == AXI_DECERR) n_decerr++;
    axi_read(32'((GP0 + 5) * 64), d, resp);
    chk(resp == AXI_OKAY && d == gaussian_to_line(map_g(5)), "CPU reads back the map");

    // construction: one frame
    stream_frame();
    wait_drain();
    chk(occ_points == valid_pixels, "every valid pixel is in one occupied Gaussian");
    if (occ_points != valid_pixels) $display("points %0d of %0d", occ_points, valid_pixels);
    chk(n_occ > 0, "occupied Gaussians produced");
    chk(32'(fb_count) + status.fb_dropped == 32'(n_occ * NS), "n_samples free bases per occupied Gaussian");
    $display("frame: %0d pixels, %0d occupied Gaussians, %0d merges, %0d overflows, %0d bases, %0d dropped",
             valid_pixels, n_occ, status.sf_merges, status.sf_overflow, fb_count, status.fb_dropped);
    // read one free basis back: it must lie inside the scene (z between origin and wall)
    @(negedge clk) begin fb_re = 1; fb_raddr = 0; end
    @(negedge clk) fb_re = 0;
    chk($signed(fb_rdata.mean.z) > 0 && $signed(fb_rdata.mean.z) <= 3000, "free basis between sensor and surface");

    // a smooth frame (a flat wall facing the sensor) runs at the segmentation rate:
    // IMG_W + 1 cycles per row, i.e. 406 frames/s for 640x480 at the 125 MHz construction clock
    begin
      longint t0, cyc;
      smooth = 1; n_occ = 0; occ_points = 0; valid_pixels = 0;
      t0 = longint'($time);
      stream_frame();
      wait_drain();
      cyc = (longint'($time) - t0) / 10 - 50;
      $display("smooth frame: %0d cycles, %0d occupied Gaussians", cyc, n_occ);
      chk(occ_points == valid_pixels, "smooth frame: every pixel in one Gaussian");
      chk(n_occ == 1, "smooth frame: one wall, one Gaussian");
      chk(cyc <= longint'((IW + 1) * IH + 64), "smooth frame at one pixel per cycle");
      chk(cyc * 88 <= 64'd125000000 * longint'(IW * IH) / 307200, "smooth frame above 88 fps at 125 MHz");
    end

    // query: batch 1, near every Gaussian
    misses0 = status.cache_misses;
    run_batch(16, 1);
    chk(status.rt_nodes_visited == 16'd5, "one search visits all 5 nodes");
    chk(status.gaussians_fetched == 32'd16, "16 Gaussians fetched once for 16 coordinates");
    chk(status.cache_misses > misses0, "cold cache misses");
    // batch 2: short batch far away
    run_batch(5, 0);
    chk(status.rt_nodes_visited == 16'd1, "far box stops at the root");
    // batch 3: again, from the cache
    misses0 = status.cache_misses;
    run_batch(16, 1);
    chk(status.cache_misses == misses0, "repeated batch is served by the cache");
    chk(status.cache_hits > 0, "cache hits");
    // batch 4: after invalidation, with the CPU on the bus
    @(negedge clk) cache_inv = 1;
    @(negedge clk) cache_inv = 0;
    misses0 = status.cache_misses;
    cpu_bg = 1;
    fork
      run_batch(16, 1);
      begin
        int nr;
        nr = 0;
        for (int i = 0; i < 40; i++) begin
          logic [1:0] rr;
          logic [LINE_W-1:0] dd;
          axi_read(32'((GP0 + (i % 16)) * 64), dd, rr);
          if (rr == AXI_OKAY && dd == gaussian_to_line(map_g(i % 16))) nr++;
        end
        chk(nr == 40, "CPU reads during the query");
      end
    join
    chk(status.cache_misses > misses0, "invalidated cache misses again");
    chk(status.query_batches == 32'd4, "batch counter");

    // map update through the write-through cache
    d = {16{32'hc0ffee00 + 32'($urandom_range(0, 255))}};
    @(negedge clk);
    mu_valid = 1; mu_we = 1; mu_addr = ptr_t'(40); mu_wdata = d;
    do @(posedge clk); while (!mu_ready);
    @(negedge clk) mu_valid = 0;
    do @(posedge clk); while (!mu_resp_valid);
    axi_read(32'(40 * 64), mu_wdata, resp);
    chk(resp == AXI_OKAY && mu_wdata == d, "map update reaches the global buffer");
    for (int k = 0; k < 2; k++) begin
      @(negedge clk);
      mu_valid = 1; mu_we = 0; mu_addr = ptr_t'(40);
      do @(posedge clk); while (!mu_ready);
      @(negedge clk) mu_valid = 0;
      do @(posedge clk); while (!mu_resp_valid);
      chk(mu_resp_rdata == d, "map line read through the cache");
    end

    // allocator: fresh lines, reuse, bypass
    begin
      ptr_t a [3];
      for (int k = 0; k < 3; k++) begin
        @(negedge clk); alloc_req = 1;
        #1 a[k] = alloc_ptr; chk(alloc_ok, "alloc ok");
      end
      @(negedge clk) begin alloc_req = 0; free_req = 1; free_ptr = a[1]; end
      @(negedge clk) begin free_req = 0; alloc_req = 1; end
      #1 chk(alloc_ptr == a[1], "freed line is reused");
      if (alloc_ptr == a[1]) n_reuse++;
      @(negedge clk) begin free_req = 1; free_ptr = a[0]; alloc_req = 1; end
      #1 chk(alloc_ptr == a[0], "free and alloc in one cycle bypass");
      if (alloc_ptr == a[0]) n_bypass++;
      @(negedge clk) begin free_req = 0; alloc_req = 0; end
      chk(32'(status.alloc_in_use) == 32'd3, "lines in use");
    end

    // every mechanism must have happened
    chk(n_pix_bp > 0, "depth input back-pressure");
    chk(n_ss_stall > 0, "segmentation stall");
    chk(status.sf_merges > 0, "segment fusion merge");
    chk(status.sf_overflow > 0, "line segment buffer overflow");
    chk(status.fb_dropped > 0, "free bases memory full");
    chk(status.cache_hits > 0 && status.cache_misses > 0, "cache hit and miss");
    chk(n_bus_conflict > 0, "bus shared by CPU and cache");
    chk(n_decerr == 2, "decode errors");
    chk(n_early > 0, "early batch end");
    chk(n_reuse > 0 && n_bypass > 0, "allocator reuse and bypass");
    $display("mechanisms: pix_bp %0d ss_stall %0d merges %0d overflow %0d fb_drop %0d hits %0d misses %0d bus %0d decerr %0d early %0d reuse %0d bypass %0d",
             n_pix_bp, n_ss_stall, status.sf_merges, status.sf_overflow, status.fb_dropped,
             status.cache_hits, status.cache_misses, n_bus_conflict, n_decerr, n_early, n_reuse, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

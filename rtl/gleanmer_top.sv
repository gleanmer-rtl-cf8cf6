// gleanmer_top: GMMap accelerator of the Gleanmer SoC with its global buffer and shared bus.
//
// Construction path (Gaussian Generation engine): raw depth pixels -> Depth Decoder -> Scanline
// Segmentation (line segments per row) -> Segment Fusion with the Line Segment Buffer (local
// occupied Gaussians) -> Free Gaussian Bases Generation with the Sample Memory, writing free
// Gaussian bases into the Free Bases Memory. Local occupied Gaussians leave on occ_* and the
// Free Bases Memory is read on fb_* by the fusion stage (free-bases fusion and map fusion),
// which is outside this RTL; that stage reaches the map through the map-update port mu_* (into
// the map cache) and the allocator port alloc_*/free_*.
//
// Query path (Fusion & Regression engine with the Gaussian Management Engine): coordinates on
// q_* -> Map Query Unit (batches of BATCH coordinates and their enclosing box) -> R-Tree Engine
// search -> Gaussian fetch through the 44 KB map cache -> Gaussian Regression Unit, time-
// interleaved over the batch -> probabilities on res_*.
//
// Memory system: the map cache is the accelerator's AXI-4 manager; the CPU's manager port
// (cpu_axi_*, the RISC-V core is outside this RTL) shares the single AXI-4 bus; the 512 KB
// global buffer is the bus's only subordinate, at byte address 0. The cache port is shared by
// the R-tree engine (highest priority), the Map Query Unit and the map-update port.
// Lint note: rst_n is reported as used both asynchronously (flop resets) and synchronously; the
// synchronous use is only the 'disable iff' of the handshake assertions, not logic.
// One clock domain; the two operating points of the chip (construction and query) are a matter
// of clock frequency and supply and need no logic here. Reset is asynchronous, active low.
module gleanmer_top
  import gleanmer_pkg::*;
#(
  parameter int unsigned IMG_W = 640,
  parameter int unsigned IMG_H = 480,
  parameter int unsigned BATCH = 16,
  localparam int unsigned SW      = $clog2(BATCH),
  localparam int unsigned FB_W    = $bits(free_basis_t),
  localparam int unsigned FB_AW   = $clog2((17 * 1024 * 8) / FB_W)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  gm_cfg_t           cfg,
  // depth stream from the I/Os
  input  logic              pix_valid,
  input  logic [15:0]       pix_raw,
  output logic              pix_ready,
  // sample memory (written by the CPU)
  input  logic              smp_we,
  input  logic [7:0]        smp_addr,
  input  sample_t           smp_wdata,
  // local occupied Gaussians to map fusion
  output logic              occ_valid,
  output pstats_t           occ_g,
  // Free Bases Memory towards free-bases fusion
  input  logic              fb_clear,
  input  logic              fb_re,
  input  logic [FB_AW-1:0]  fb_raddr,
  output free_basis_t       fb_rdata,
  output logic [FB_AW:0]    fb_count,
  // queries
  input  logic              q_valid,
  input  vec3_t             q_coord,
  input  logic              q_last,
  output logic              q_ready,
  output logic              res_valid,
  output logic [SW-1:0]     res_slot,
  output logic [15:0]       res_prob,
  input  logic              res_ready,
  // CPU manager port on the AXI-4 bus
  input  axi_req_t          cpu_axi_req,
  output axi_rsp_t          cpu_axi_rsp,
  // map-update port into the map cache (map fusion)
  input  logic              mu_valid,
  input  logic              mu_we,
  input  ptr_t              mu_addr,
  input  logic [LINE_W-1:0] mu_wdata,
  output logic              mu_ready,
  output logic              mu_resp_valid,
  output logic [LINE_W-1:0] mu_resp_rdata,
  input  logic              cache_inv,
  // memory allocator
  input  logic              alloc_req,
  output ptr_t              alloc_ptr,
  output logic              alloc_ok,
  input  logic              free_req,
  input  ptr_t              free_ptr,
  // activity counters
  output gm_status_t        status
);
  // ---------------- Gaussian Generation engine ----------------
  logic       dd_valid, dd_ready, dd_eol, dd_eof;
  coord_t     dd_depth;
  logic [9:0] dd_col, dd_row;

  depth_decoder #(.IMG_W(IMG_W), .IMG_H(IMG_H)) u_dd (
    .clk(clk), .rst_n(rst_n), .depth_scale(cfg.depth_scale),
    .in_valid(pix_valid), .in_raw(pix_raw), .in_ready(pix_ready),
    .out_valid(dd_valid), .out_depth(dd_depth), .out_col(dd_col), .out_row(dd_row),
    .out_eol(dd_eol), .out_eof(dd_eof), .out_ready(dd_ready)
  );

  logic    ss_valid, ss_seg_valid, ss_row_end, ss_frame_end, ss_ready;
  pstats_t ss_seg;

  scanline_seg u_ss (
    .clk(clk), .rst_n(rst_n), .cfg(cfg),
    .in_valid(dd_valid), .in_depth(dd_depth), .in_col(dd_col), .in_row(dd_row),
    .in_eol(dd_eol), .in_eof(dd_eof), .in_ready(dd_ready),
    .out_valid(ss_valid), .out_seg_valid(ss_seg_valid), .out_seg(ss_seg),
    .out_row_end(ss_row_end), .out_frame_end(ss_frame_end), .out_ready(ss_ready)
  );

  logic    sf_valid, sf_ready;
  pstats_t sf_g;

  segment_fusion u_sf (
    .clk(clk), .rst_n(rst_n), .fuse_thr(cfg.fuse_thr),
    .in_valid(ss_valid), .in_seg_valid(ss_seg_valid), .in_seg(ss_seg),
    .in_row_end(ss_row_end), .in_frame_end(ss_frame_end), .in_ready(ss_ready),
    .out_valid(sf_valid), .out_g(sf_g), .out_ready(sf_ready),
    .overflow_cnt(status.sf_overflow), .merge_cnt(status.sf_merges)
  );

  fgbg_unit u_fgbg (
    .clk(clk), .rst_n(rst_n), .origin(cfg.origin), .n_samples(cfg.n_samples),
    .smp_we(smp_we), .smp_addr(smp_addr), .smp_wdata(smp_wdata),
    .in_valid(sf_valid), .in_g(sf_g), .in_ready(sf_ready),
    .occ_out_valid(occ_valid), .occ_out(occ_g),
    .fb_clear(fb_clear), .fb_re(fb_re), .fb_raddr(fb_raddr), .fb_rdata(fb_rdata),
    .fb_count(fb_count), .fb_dropped(status.fb_dropped)
  );

  // ---------------- query path ----------------
  logic              rt_start, rt_done, rt_valid, rt_ready;
  bbox_t             rt_qbox;
  ptr_t              rt_ptr;
  logic              c_we, g_clear, g_valid, g_ready, fin_start, g_busy;
  logic [SW-1:0]     c_idx, g_slot;
  vec3_t             c_val;
  gaussian_t         g_out;
  logic [SW:0]       fin_n;

  // cache requesters: 0 = R-tree engine, 1 = Map Query Unit, 2 = map-update port
  logic              a_valid [3];
  logic              a_we    [3];
  ptr_t              a_addr  [3];
  logic [LINE_W-1:0] a_wdata [3];
  logic              a_ready [3];
  logic              a_resp  [3];
  logic              c_valid_w, c_we_w, c_ready_w, c_resp_w;
  ptr_t              c_addr_w;
  logic [LINE_W-1:0] c_wdata_w, c_rdata_w;

  map_query_unit #(.BATCH(BATCH)) u_mqu (
    .clk(clk), .rst_n(rst_n),
    .q_valid(q_valid), .q_coord(q_coord), .q_last(q_last), .q_ready(q_ready),
    .rt_start(rt_start), .rt_qbox(rt_qbox), .rt_done(rt_done),
    .rt_valid(rt_valid), .rt_ptr(rt_ptr), .rt_ready(rt_ready),
    .mreq_valid(a_valid[1]), .mreq_addr(a_addr[1]), .mreq_ready(a_ready[1]),
    .mresp_valid(a_resp[1]), .mresp_data(c_rdata_w),
    .c_we(c_we), .c_idx(c_idx), .c_val(c_val), .g_clear(g_clear),
    .g_valid(g_valid), .g_slot(g_slot), .g_out(g_out), .g_ready(g_ready),
    .fin_start(fin_start), .fin_n(fin_n), .g_busy(g_busy),
    .batches(status.query_batches), .gaussians_fetched(status.gaussians_fetched)
  );

  gaussian_regression #(.BATCH(BATCH)) u_gru (
    .clk(clk), .rst_n(rst_n), .prior(cfg.prior),
    .c_we(c_we), .c_idx(c_idx), .c_val(c_val), .clear(g_clear),
    .in_valid(g_valid), .in_slot(g_slot), .in_g(g_out), .in_ready(g_ready),
    .fin_start(fin_start), .fin_n(fin_n),
    .out_valid(res_valid), .out_slot(res_slot), .out_prob(res_prob), .out_ready(res_ready),
    .busy(g_busy)
  );

  rtree_engine u_rt (
    .clk(clk), .rst_n(rst_n), .start(rt_start), .qbox(rt_qbox), .root(cfg.rt_root),
    .busy(), .done(rt_done),
    .mreq_valid(a_valid[0]), .mreq_addr(a_addr[0]), .mreq_ready(a_ready[0]),
    .mresp_valid(a_resp[0]), .mresp_data(c_rdata_w),
    .out_valid(rt_valid), .out_ptr(rt_ptr), .out_ready(rt_ready),
    .nodes_visited(status.rt_nodes_visited), .stack_overflow(status.rt_stack_overflow)
  );

  assign a_we[0] = 1'b0;  assign a_wdata[0] = '0;
  assign a_we[1] = 1'b0;  assign a_wdata[1] = '0;
  assign a_valid[2] = mu_valid;
  assign a_we[2]    = mu_we;
  assign a_addr[2]  = mu_addr;
  assign a_wdata[2] = mu_wdata;
  assign mu_ready      = a_ready[2];
  assign mu_resp_valid = a_resp[2];
  assign mu_resp_rdata = c_rdata_w;

  mem_arb #(.N(3)) u_arb (
    .clk(clk), .rst_n(rst_n),
    .r_valid(a_valid), .r_we(a_we), .r_addr(a_addr), .r_wdata(a_wdata),
    .r_ready(a_ready), .r_resp(a_resp),
    .c_valid(c_valid_w), .c_we(c_we_w), .c_addr(c_addr_w), .c_wdata(c_wdata_w),
    .c_ready(c_ready_w), .c_resp(c_resp_w)
  );

  // ---------------- Gaussian Management Engine, bus, global buffer ----------------
  axi_req_t m_req [2];
  axi_rsp_t m_rsp [2];
  axi_req_t s_req [1];
  axi_rsp_t s_rsp [1];

  gm_cache u_cache (
    .clk(clk), .rst_n(rst_n), .inv(cache_inv),
    .req_valid(c_valid_w), .req_we(c_we_w), .req_addr(c_addr_w), .req_wdata(c_wdata_w),
    .req_ready(c_ready_w), .resp_valid(c_resp_w), .resp_rdata(c_rdata_w),
    .axi_o(m_req[1]), .axi_i(m_rsp[1]),
    .hits(status.cache_hits), .misses(status.cache_misses)
  );

  mem_allocator u_alloc (
    .clk(clk), .rst_n(rst_n), .alloc_req(alloc_req), .alloc_ptr(alloc_ptr), .alloc_ok(alloc_ok),
    .free_req(free_req), .free_ptr(free_ptr),
    .in_use(status.alloc_in_use), .leaked(status.alloc_leaked)
  );

  assign m_req[0]    = cpu_axi_req;
  assign cpu_axi_rsp = m_rsp[0];

  axi_bus #(.NM(2), .NS(1), .SLV_BASE('0), .SLV_MASK(32'hfff8_0000)) u_bus (
    .clk(clk), .rst_n(rst_n), .m_req(m_req), .m_rsp(m_rsp), .s_req(s_req), .s_rsp(s_rsp)
  );

  global_buffer u_gb (.clk(clk), .rst_n(rst_n), .s_i(s_req[0]), .s_o(s_rsp[0]));

endmodule

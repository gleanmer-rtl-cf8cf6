// gleanmer_pkg: number formats, records and bus types shared by the GMMap accelerator.
//
// Coordinates and Gaussian means use a 19-bit signed fixed-point format (the reduced Gaussian
// precision of the design); covariance and precision (inverse covariance) entries keep 32 bits.
// The placement of the binary point (8 fractional bits for coordinates, 16 for matrix entries),
// the record layouts and the single-beat 512-bit AXI-4 subset are this design's own choices.
// All records that live in the global map (Gaussians, R-tree nodes) fit one 512-bit line, which
// is also the cache line and the bus data width.
package gleanmer_pkg;

  // ---- number formats ----
  localparam int unsigned COORD_W    = 19;  // Gaussian mean / coordinate width
  localparam int unsigned COORD_FRAC = 8;   // fractional bits of a coordinate (1/256 m)
  localparam int unsigned COV_W      = 32;  // covariance / precision entry width
  localparam int unsigned COV_FRAC   = 16;  // fractional bits of a covariance/precision entry

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic signed [COV_W-1:0]   cov_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } vec3_t;

  typedef struct packed {
    vec3_t lo;
    vec3_t hi;
  } bbox_t;

  // Symmetric 3x3 matrix, upper triangle: [0]=xx [1]=xy [2]=xz [3]=yy [4]=yz [5]=zz
  typedef cov_t [5:0] sym3_t;

  // Global-map Gaussian as used by regression: mean, precision matrix, weight, label.
  typedef struct packed {
    logic        occ;      // 1 = occupied Gaussian, 0 = free Gaussian
    logic [15:0] weight;   // mixture weight (number of supporting points, saturating)
    vec3_t       mean;
    sym3_t       prec;     // inverse covariance, COV_FRAC fractional bits per 1/m^2
  } gaussian_t;

  // Sufficient statistics of a set of 3D points: a line segment (one row) or a local occupied
  // Gaussian (segments fused across rows). Mean = sum/n, covariance = sumsq/n - mean*mean^T.
  localparam int unsigned N_W     = 20;
  localparam int unsigned SUM_W   = 40;
  localparam int unsigned SUMSQ_W = 64;
  typedef struct packed {
    logic [9:0]                    col_s;   // first image column of the segment
    logic [9:0]                    col_e;   // last image column of the segment
    logic [N_W-1:0]                n;
    logic signed [2:0][SUM_W-1:0]  sum;     // [2]=x [1]=y [0]=z
    logic signed [5:0][SUMSQ_W-1:0] sumsq;  // same order as sym3_t
    bbox_t                         box;     // bounding box of the points
  } pstats_t;

  // Free Gaussian basis: the Gaussian of a uniform distribution along one sampled ray.
  typedef struct packed {
    vec3_t mean;
    sym3_t cov;
  } free_basis_t;

  // Representative-ray sample: fractions (Q0.8) inside an occupied Gaussian's bounding box.
  typedef struct packed {
    logic [7:0] pad;
    logic [7:0] fx;
    logic [7:0] fy;
    logic [7:0] fz;
  } sample_t;

  // ---- R-tree ----
  localparam int unsigned LINE_W   = 512;   // global-map record / cache line / bus width
  localparam int unsigned PTR_W    = 13;    // line index inside the 512 KB global buffer
  localparam int unsigned RT_FANOUT = 4;
  typedef logic [PTR_W-1:0] ptr_t;
  typedef struct packed {
    bbox_t box;
    logic  leaf;   // 1: ptr names a Gaussian record, 0: ptr names a child node
    ptr_t  ptr;    // 0 = empty entry (line 0 is never allocated)
  } rt_entry_t;    // 128 bits
  typedef rt_entry_t [RT_FANOUT-1:0] rt_node_t;  // 512 bits

  // ---- AXI-4, single-beat subset (AxLEN=0, AxSIZE=64 bytes, one ID) ----
  localparam int unsigned AXI_AW = 32;
  localparam int unsigned AXI_DW = LINE_W;
  typedef struct packed {
    logic              aw_valid;
    logic [AXI_AW-1:0] aw_addr;
    logic              w_valid;
    logic [AXI_DW-1:0] w_data;
    logic [AXI_DW/8-1:0] w_strb;
    logic              b_ready;
    logic              ar_valid;
    logic [AXI_AW-1:0] ar_addr;
    logic              r_ready;
  } axi_req_t;
  typedef struct packed {
    logic              aw_ready;
    logic              w_ready;
    logic              b_valid;
    logic [1:0]        b_resp;
    logic              ar_ready;
    logic              r_valid;
    logic [AXI_DW-1:0] r_data;
    logic [1:0]        r_resp;
  } axi_rsp_t;
  localparam logic [1:0] AXI_OKAY   = 2'b00;
  localparam logic [1:0] AXI_DECERR = 2'b11;

  // ---- run-time configuration written by the CPU ----
  typedef struct packed {
    logic [15:0] depth_scale;  // raw depth unit -> coordinate LSB, Q8.8
    logic [9:0]  cx;           // principal point, pixels
    logic [9:0]  cy;
    logic [31:0] inv_fx;       // 1/focal length, Q8.24
    logic [31:0] inv_fy;
    coord_t      seg_thr;      // SS: largest depth error from the line prediction
    logic [7:0]  seg_min_pts;  // SS: shortest segment that is kept
    coord_t      fuse_thr;     // SF: largest depth gap between segments of adjacent rows
    vec3_t       origin;       // camera position used for free-space rays
    logic [7:0]  n_samples;    // FGBG: representative rays per occupied Gaussian
    ptr_t        rt_root;      // R-tree root node line
    logic [31:0] prior;        // regression: prior weight of the unexplored state, Q16.16
  } gm_cfg_t;

  // ---- activity counters of the accelerator ----
  typedef struct packed {
    logic [31:0] cache_hits;
    logic [31:0] cache_misses;
    logic [31:0] query_batches;
    logic [31:0] gaussians_fetched;
    logic [15:0] rt_nodes_visited;   // of the last R-tree search
    logic [15:0] rt_stack_overflow;
    logic [31:0] sf_merges;
    logic [31:0] sf_overflow;
    logic [31:0] fb_dropped;
    logic [31:0] alloc_leaked;
    logic [PTR_W:0] alloc_in_use;
  } gm_status_t;

  function automatic gaussian_t line_to_gaussian(input logic [LINE_W-1:0] l);
    return gaussian_t'(l[$bits(gaussian_t)-1:0]);
  endfunction
  function automatic logic [LINE_W-1:0] gaussian_to_line(input gaussian_t g);
    return LINE_W'(g);
  endfunction

endpackage

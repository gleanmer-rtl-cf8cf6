// fgbg_unit: Free Gaussian Bases Generation (FGBG) Unit with its Sample Memory.
//
// Free space is generated directly from each local occupied Gaussian, not from every line
// segment: a small set of representative sensor rays is sampled per occupied Gaussian, and each
// ray from the camera to its sampled end point becomes one free Gaussian basis. The Sample
// Memory (1 KB, 256 words, written by the CPU) holds the sample pattern: word k gives the
// fractions (fx, fy, fz, Q0.8) of the end point inside the occupied Gaussian's bounding box,
// e = lo + f * (hi - lo) per axis. The basis for the ray from origin o to e is the Gaussian of
// a uniform distribution on that segment: mean (o+e)/2, covariance v*v^T/12 with v = e - o.
// Bases are written, in order, into the Free Bases Memory (17 KB, a gm_sram whose read port is
// left to the free-bases fusion stage); when it is full further bases are dropped and counted.
// The use of bounding-box fractions as the sample pattern and the uniform-segment covariance
// are this design's own choices: the paper states only that a few representative rays are
// sampled from each occupied Gaussian.
//
// Timing: one basis per cycle after a one-cycle sample read (the next sample is read while the
// current one is converted), so an occupied Gaussian with
// n_samples samples is accepted, processed and released in n_samples + 2 cycles. The occupied
// Gaussian itself is forwarded on occ_out for map fusion when it is accepted.
module fgbg_unit
  import gleanmer_pkg::*;
#(
  parameter int unsigned SMP_BYTES = 1024,
  parameter int unsigned FB_BYTES  = 17 * 1024,
  localparam int unsigned SMP_DEPTH = SMP_BYTES / 4,
  localparam int unsigned SMP_AW    = $clog2(SMP_DEPTH),
  localparam int unsigned FB_W      = $bits(free_basis_t),
  localparam int unsigned FB_DEPTH  = (FB_BYTES * 8) / FB_W,
  localparam int unsigned FB_AW     = $clog2(FB_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  vec3_t             origin,
  input  logic [7:0]        n_samples,
  // sample memory write port (CPU)
  input  logic              smp_we,
  input  logic [SMP_AW-1:0] smp_addr,
  input  sample_t           smp_wdata,
  // occupied Gaussians in
  input  logic              in_valid,
  input  pstats_t           in_g,
  output logic              in_ready,
  // occupied Gaussians forwarded to map fusion
  output logic              occ_out_valid,
  output pstats_t           occ_out,
  // free bases memory: frame restart and read port
  input  logic              fb_clear,
  input  logic              fb_re,
  input  logic [FB_AW-1:0]  fb_raddr,
  output free_basis_t       fb_rdata,
  output logic [FB_AW:0]    fb_count,
  output logic [31:0]       fb_dropped
);
  typedef enum logic [1:0] { S_IDLE, S_READ, S_GEN } state_t;
  state_t state;

  bbox_t       box;
  logic [7:0]  k;
  sample_t     smp;
  logic        smp_re;
  logic [SMP_AW-1:0] smp_raddr;
  logic        fb_we;
  free_basis_t basis;

  gm_sram #(.W($bits(sample_t)), .DEPTH(SMP_DEPTH)) u_smp (
    .clk(clk), .we(smp_we), .waddr(smp_addr), .wdata(smp_wdata),
    .re(smp_re), .raddr(smp_raddr), .rdata(smp)
  );

  gm_sram #(.W(FB_W), .DEPTH(FB_DEPTH)) u_fbm (
    .clk(clk), .we(fb_we), .waddr(FB_AW'(fb_count)), .wdata(basis),
    .re(fb_re), .raddr(fb_raddr), .rdata(fb_rdata)
  );

  function automatic coord_t lerp(coord_t lo, coord_t hi, logic [7:0] f);
    logic signed [31:0] span;
    span = 32'(hi) - 32'(lo);
    return coord_t'(32'(lo) + ((span * $signed({24'd0, f})) >>> 8));
  endfunction

  // one basis from the current sample
  vec3_t e;
  logic signed [COORD_W:0] vx, vy, vz;
  localparam logic signed [31:0] INV12 = 32'sd5461;  // round(2^16 / 12)
  function automatic cov_t cov12(logic signed [COORD_W:0] a, logic signed [COORD_W:0] b);
    logic signed [63:0] p;
    p = (64'(a) * 64'(b) * 64'(INV12)) >>> 16;  // Q.16 product scaled by 1/12
    return cov_t'(p);
  endfunction

  always_comb begin
    e.x = lerp(box.lo.x, box.hi.x, smp.fx);
    e.y = lerp(box.lo.y, box.hi.y, smp.fy);
    e.z = lerp(box.lo.z, box.hi.z, smp.fz);
    vx  = (COORD_W+1)'(e.x) - (COORD_W+1)'(origin.x);
    vy  = (COORD_W+1)'(e.y) - (COORD_W+1)'(origin.y);
    vz  = (COORD_W+1)'(e.z) - (COORD_W+1)'(origin.z);
    basis.mean.x = coord_t'(((COORD_W+1)'(e.x) + (COORD_W+1)'(origin.x)) >>> 1);
    basis.mean.y = coord_t'(((COORD_W+1)'(e.y) + (COORD_W+1)'(origin.y)) >>> 1);
    basis.mean.z = coord_t'(((COORD_W+1)'(e.z) + (COORD_W+1)'(origin.z)) >>> 1);
    basis.cov[0] = cov12(vx, vx);
    basis.cov[1] = cov12(vx, vy);
    basis.cov[2] = cov12(vx, vz);
    basis.cov[3] = cov12(vy, vy);
    basis.cov[4] = cov12(vy, vz);
    basis.cov[5] = cov12(vz, vz);
  end

  assign in_ready = (state == S_IDLE) && !fb_clear;
  // the next sample is read while the current one is turned into a basis
  assign smp_re    = (state == S_READ) || (state == S_GEN && k + 1'b1 != n_samples);
  assign smp_raddr = (state == S_GEN) ? SMP_AW'(k + 1'b1) : SMP_AW'(k);
  assign fb_we    = (state == S_GEN) && (32'(fb_count) < FB_DEPTH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; box <= '0; k <= '0;
      fb_count <= '0; fb_dropped <= '0;
      occ_out_valid <= 1'b0; occ_out <= '0;
    end else begin
      occ_out_valid <= 1'b0;
      if (fb_clear) begin
        fb_count <= '0; fb_dropped <= '0;
      end
      unique case (state)
        S_IDLE: if (in_valid && !fb_clear) begin
          box <= in_g.box;
          k   <= '0;
          occ_out_valid <= 1'b1;
          occ_out       <= in_g;
          state <= (n_samples == 0) ? S_IDLE : S_READ;
        end
        S_READ: state <= S_GEN;
        S_GEN: begin
          if (32'(fb_count) < FB_DEPTH) fb_count <= fb_count + 1'b1;
          else fb_dropped <= fb_dropped + 1;
          k <= k + 1'b1;
          if (k + 1'b1 == n_samples) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

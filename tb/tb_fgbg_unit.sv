// tb_fgbg_unit: self-checking test of the Free Gaussian Bases Generation Unit.
// Loads a random sample pattern into the Sample Memory, sends occupied Gaussians with random
// bounding boxes and checks every free basis written to the Free Bases Memory (mean and
// covariance recomputed here with integer arithmetic from the ray end point), the forwarded
// occupied Gaussian, the n_samples + 2 cycle occupancy per Gaussian, and that bases beyond the
// memory's 559 entries (17 KB) are dropped and counted.
module tb_fgbg_unit;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0;
  vec3_t origin;
  logic [7:0] n_samples;
  logic smp_we = 0;
  logic [7:0] smp_addr = 0;
  sample_t smp_wdata = '0;
  logic in_valid = 0, in_ready, occ_out_valid;
  pstats_t in_g, occ_out;
  logic fb_clear = 0, fb_re = 0;
  logic [9:0] fb_raddr = 0;
  free_basis_t fb_rdata;
  logic [10:0] fb_count;
  logic [31:0] fb_dropped;
  int checks = 0, failures = 0;
  sample_t smp [256];
  free_basis_t exp_b [$];

  fgbg_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic int lerp(int lo, int hi, int f);
    return lo + (((hi - lo) * f) >>> 8);
  endfunction

  function automatic void expect_bases(bbox_t b, int ns);
    for (int k = 0; k < ns; k++) begin
      free_basis_t fb;
      longint e[3], o[3], v[3];
      int idx;
      e[0] = lerp(b.lo.x, b.hi.x, smp[k].fx);
      e[1] = lerp(b.lo.y, b.hi.y, smp[k].fy);
      e[2] = lerp(b.lo.z, b.hi.z, smp[k].fz);
      o[0] = origin.x; o[1] = origin.y; o[2] = origin.z;
      for (int i = 0; i < 3; i++) v[i] = e[i] - o[i];
      fb.mean.x = coord_t'((e[0] + o[0]) >>> 1);
      fb.mean.y = coord_t'((e[1] + o[1]) >>> 1);
      fb.mean.z = coord_t'((e[2] + o[2]) >>> 1);
      idx = 0;
      for (int i = 0; i < 3; i++)
        for (int j = i; j < 3; j++) begin
          fb.cov[idx] = cov_t'((v[i] * v[j] * 5461) >>> 16);
          idx++;
        end
      exp_b.push_back(fb);
    end
  endfunction

  task automatic send_g(pstats_t g, int ns);
    int t0, t1;
    @(negedge clk);
    in_valid = 1; in_g = g;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    t0 = $time;
    #1;
    checks++;
    if (!occ_out_valid || occ_out !== g) failures++;
    @(negedge clk); in_valid = 0;
    while (!in_ready) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != ns + 2) begin failures++; $display("busy %0d cycles", (t1 - t0) / 10); end
  endtask

  function automatic pstats_t rand_g();
    pstats_t g = '0;
    int a, b;
    a = $urandom_range(0, 20000) - 10000; b = a + $urandom_range(0, 5000); g.box.lo.x = coord_t'(a); g.box.hi.x = coord_t'(b);
    a = $urandom_range(0, 20000) - 10000; b = a + $urandom_range(0, 5000); g.box.lo.y = coord_t'(a); g.box.hi.y = coord_t'(b);
    a = $urandom_range(500, 20000);       b = a + $urandom_range(0, 5000); g.box.lo.z = coord_t'(a); g.box.hi.z = coord_t'(b);
    g.n = N_W'($urandom_range(1, 1000));
    return g;
  endfunction

  initial begin
    origin.x = 19'sd300; origin.y = -19'sd200; origin.z = 19'sd50;
    n_samples = 8'd5;
    in_g = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 256; k++) begin
      @(negedge clk);
      smp[k] = sample_t'($urandom);
      smp_we = 1; smp_addr = 8'(k); smp_wdata = smp[k];
    end
    @(negedge clk); smp_we = 0;
    for (int n = 0; n < 10; n++) begin
      pstats_t g;
      g = rand_g();
      expect_bases(g.box, 5);
      send_g(g, 5);
    end
    n_samples = 8'd200;
    for (int n = 0; n < 3; n++) begin
      pstats_t g;
      g = rand_g();
      expect_bases(g.box, 200);
      send_g(g, 200);
    end
    repeat (3) @(negedge clk);
    checks += 2;
    if (fb_count != 11'd559) begin failures++; $display("count %0d", fb_count); end
    if (fb_dropped != 32'(650 - 559)) begin failures++; $display("dropped %0d", fb_dropped); end
    for (int i = 0; i < 559; i++) begin
      free_basis_t e;
      e = exp_b[i];
      @(negedge clk); fb_re = 1; fb_raddr = 10'(i);
      @(posedge clk); #1;
      checks++;
      if (fb_rdata !== e) begin
        failures++;
        if (failures < 5) $display("basis %0d mismatch: mean %0d/%0d cov0 %0d/%0d", i, fb_rdata.mean.z, e.mean.z, fb_rdata.cov[0], e.cov[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gaussian_regression: self-checking test of the time-interleaved Gaussian Regression Unit.
// A batch of 16 random coordinates is loaded, then 20 random Gaussians (occupied or free) are
// streamed, each presented to all 16 coordinate slots on consecutive cycles; the unit must
// take one pair per cycle. The 16 probabilities are compared with a bit-exact model written
// here from the formula (Mahalanobis distance, 2^-x weight with linear fractional part,
// prior-weighted ratio). A second batch of 5 coordinates with no Gaussians must give 0.5 each.
// Also checks the result against exact exp() within 0.08, as a sanity bound on the
// approximation.
module tb_gaussian_regression;
  import gleanmer_pkg::*;
  localparam int B = 16;
  logic clk = 0, rst_n = 0;
  logic [31:0] prior = 32'd65536;
  logic c_we = 0, clear = 0, in_valid = 0, in_ready, fin_start = 0;
  logic [3:0] c_idx = 0, in_slot = 0, out_slot;
  vec3_t c_val;
  gaussian_t in_g;
  logic [4:0] fin_n = 0;
  logic out_valid, out_ready = 0, busy;
  logic [15:0] out_prob;
  int checks = 0, failures = 0, n_informative = 0;

  gaussian_regression #(.BATCH(B)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  vec3_t coords [B];
  longint num [B], den [B];
  real rnum [B], rden [B];
  always @(negedge clk) out_ready <= ($urandom_range(0, 1) == 1);

  function automatic longint qdist(vec3_t x, gaussian_t g);
    longint d[3];
    d[0] = longint'(x.x) - g.mean.x; d[1] = longint'(x.y) - g.mean.y; d[2] = longint'(x.z) - g.mean.z;
    return d[0]*d[0]*g.prec[0] + d[1]*d[1]*g.prec[3] + d[2]*d[2]*g.prec[5]
         + 2 * (d[0]*d[1]*g.prec[1] + d[0]*d[2]*g.prec[2] + d[1]*d[2]*g.prec[4]);
  endfunction

  function automatic longint wmodel(longint q, int weight);
    longint t, k, f16, mant;
    if (q < 0) q = 0;
    if (q >= (longint'(1) << 38)) return 0;
    t = (q * 47274) >> 16;
    k = t >> 32; f16 = (t >> 16) & 16'hffff;
    mant = 65536 - (f16 >> 1);
    if (k >= 40) return 0;
    return (longint'(weight) * mant) >> k;
  endfunction

  task automatic collect(int n, bit empty);
    int got = 0;
    while (got < n) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        longint e, nn, dd;
        real pr;
        nn = num[out_slot] + (prior >> 1); dd = den[out_slot] + prior;
        e = (nn << 16) / dd; if (e > 65535) e = 65535;
        if (empty) e = 32768;
        checks++;
        if (longint'(out_prob) != e) begin
          failures++; $display("slot %0d prob %0d exp %0d", out_slot, out_prob, e);
        end
        pr = (rnum[out_slot] + 0.5) / (rden[out_slot] + 1.0);
        checks++;
        if ((out_prob / 65536.0 - pr) > 0.08 || (pr - out_prob / 65536.0) > 0.08) begin
          failures++; $display("slot %0d prob %f exact %f", out_slot, out_prob / 65536.0, pr);
        end
        if (out_prob > 16'd39321 || out_prob < 16'd26214) n_informative++;
        got++;
      end
    end
  endtask

  initial begin
    int t0, t1;
    in_g = '0; c_val = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < B; i++) begin
      @(negedge clk);
      coords[i].x = coord_t'($urandom_range(0, 400) - 200);
      coords[i].y = coord_t'($urandom_range(0, 400) - 200);
      coords[i].z = coord_t'($urandom_range(0, 400) + 800);
      c_we = 1; c_idx = 4'(i); c_val = coords[i];
      num[i] = 0; den[i] = 0; rnum[i] = 0; rden[i] = 0;
    end
    @(negedge clk); c_we = 0; clear = 1;
    @(negedge clk); clear = 0;
    t0 = $time;
    for (int n = 0; n < 20; n++) begin
      gaussian_t g;
      g.occ = 1'($urandom_range(0, 1));
      g.weight = 16'($urandom_range(1, 3000));
      g.mean.x = coord_t'($urandom_range(0, 400) - 200);
      g.mean.y = coord_t'($urandom_range(0, 400) - 200);
      g.mean.z = coord_t'($urandom_range(0, 400) + 800);
      g.prec[0] = cov_t'($urandom_range(200000, 4000000));
      g.prec[3] = cov_t'($urandom_range(200000, 4000000));
      g.prec[5] = cov_t'($urandom_range(200000, 4000000));
      g.prec[1] = cov_t'($urandom_range(0, 100000) - 50000);
      g.prec[2] = cov_t'($urandom_range(0, 100000) - 50000);
      g.prec[4] = cov_t'($urandom_range(0, 100000) - 50000);
      for (int s = 0; s < B; s++) begin
        longint q, w;
        @(negedge clk);
        checks++;
        if (!in_ready) failures++;
        in_valid = 1; in_slot = 4'(s); in_g = g;
        q = qdist(coords[s], g);
        w = wmodel(q, g.weight);
        den[s] += w; if (g.occ) num[s] += w;
        rden[s] += g.weight * $exp(-(q / 4294967296.0) / 2.0);
        if (g.occ) rnum[s] += g.weight * $exp(-(q / 4294967296.0) / 2.0);
      end
    end
    @(negedge clk); in_valid = 0;
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != 20 * B + 1) begin failures++; $display("feed took %0d", (t1 - t0) / 10); end
    fin_start = 1; fin_n = 5'(B);
    @(negedge clk); fin_start = 0;
    collect(B, 0);
    wait (!busy);
    checks++;
    if (n_informative < 3) failures++;  // the batch must move some coordinates away from 0.5
    $display("coordinates away from 0.5: %0d", n_informative);
    // empty batch of five
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0; fin_start = 1; fin_n = 5'd5;
    for (int i = 0; i < B; i++) begin num[i] = 0; den[i] = 0; rnum[i] = 0; rden[i] = 0; end
    @(negedge clk); fin_start = 0;
    collect(5, 1);
    repeat (5) @(negedge clk);
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

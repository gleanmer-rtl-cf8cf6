// tb_gaussian_distance: self-checking test of the Gaussian Distance Unit. Random coordinates,
// means and symmetric precision matrices; the squared Mahalanobis distance is recomputed here
// with 64-bit integers (values are kept small enough for that) and compared one cycle after
// each input, with a new input every cycle; the tag must travel with its result.
module tb_gaussian_distance;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  vec3_t x, mu;
  sym3_t prec;
  logic [7:0] in_tag, out_tag;
  logic [79:0] out_q;
  int checks = 0, failures = 0;
  longint exp_q [$];
  int exp_t [$];

  gaussian_distance #(.TAG_W(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e; int t;
    e = exp_q.pop_front(); t = exp_t.pop_front();
    checks++;
    if (out_q != 80'(e) || out_tag != 8'(t)) begin
      failures++;
      $display("q got %0d exp %0d", out_q, e);
    end
  end

  initial begin
    x = '0; mu = '0; prec = '0; in_tag = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      longint d[3], p[6], q;
      @(negedge clk);
      in_valid = 1;
      x.x = coord_t'($urandom_range(0, 2000) - 1000); mu.x = coord_t'($urandom_range(0, 2000) - 1000);
      x.y = coord_t'($urandom_range(0, 2000) - 1000); mu.y = coord_t'($urandom_range(0, 2000) - 1000);
      x.z = coord_t'($urandom_range(0, 2000) - 1000); mu.z = coord_t'($urandom_range(0, 2000) - 1000);
      // diagonally dominant, hence positive definite
      p[1] = $urandom_range(0, 20000) - 10000; p[2] = $urandom_range(0, 20000) - 10000;
      p[4] = $urandom_range(0, 20000) - 10000;
      p[0] = 30000 + $urandom_range(0, 100000); p[3] = 30000 + $urandom_range(0, 100000);
      p[5] = 30000 + $urandom_range(0, 100000);
      for (int i = 0; i < 6; i++) prec[i] = cov_t'(p[i]);
      in_tag = 8'(n);
      d[0] = longint'(x.x) - mu.x; d[1] = longint'(x.y) - mu.y; d[2] = longint'(x.z) - mu.z;
      q = d[0]*d[0]*p[0] + d[1]*d[1]*p[3] + d[2]*d[2]*p[5] + 2*(d[0]*d[1]*p[1] + d[0]*d[2]*p[2] + d[1]*d[2]*p[4]);
      exp_q.push_back(q); exp_t.push_back(n & 255);
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

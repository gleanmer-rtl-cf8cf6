// gaussian_distance: Gaussian Distance Unit.
//
// Computes the squared Mahalanobis distance q = (x-mu)^T P (x-mu) of a coordinate x from a
// Gaussian with mean mu and precision (inverse covariance) P. Coordinates carry COORD_FRAC and
// P entries COV_FRAC fractional bits, so q is returned with 2*COORD_FRAC+COV_FRAC = 32
// fractional bits, unsigned (P is positive semi-definite; a negative result from a malformed
// P is clamped to 0). One registered stage: inputs sampled with in_valid appear on out_q with
// out_valid one cycle later, one new input per cycle. A tag travels with each input so the
// caller can interleave many coordinates through one unit. The paper names the unit only; the
// metric and timing are this design's choice.
module gaussian_distance
  import gleanmer_pkg::*;
#(
  parameter int unsigned TAG_W = 8,
  localparam int unsigned Q_W  = 80
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  vec3_t            x,
  input  vec3_t            mu,
  input  sym3_t            prec,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [Q_W-1:0]   out_q,
  output logic [TAG_W-1:0] out_tag
);
  logic signed [COORD_W:0] dx, dy, dz;
  logic signed [Q_W:0]     q_c;

  always_comb begin
    dx = (COORD_W+1)'(x.x) - (COORD_W+1)'(mu.x);
    dy = (COORD_W+1)'(x.y) - (COORD_W+1)'(mu.y);
    dz = (COORD_W+1)'(x.z) - (COORD_W+1)'(mu.z);
    q_c = (Q_W+1)'(dx * dx * prec[0]) + (Q_W+1)'(dy * dy * prec[3]) + (Q_W+1)'(dz * dz * prec[5])
        + (((Q_W+1)'(dx * dy * prec[1]) + (Q_W+1)'(dx * dz * prec[2]) + (Q_W+1)'(dy * dz * prec[4])) <<< 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_q     <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_q   <= q_c[Q_W] ? '0 : q_c[Q_W-1:0];
        out_tag <= in_tag;
      end
    end
  end
endmodule

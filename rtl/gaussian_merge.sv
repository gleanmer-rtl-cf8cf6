// gaussian_merge: Gaussian Merge Unit.
//
// Gaussians under construction are kept as sufficient statistics (point count, sum of points,
// sum of outer products, bounding box, image-column span). Merging two of them is then exact:
// counts, sums and second moments add, boxes and column spans are united. The mean and
// covariance of the merged Gaussian follow from the sums (mean = sum/n, cov = sumsq/n -
// mean*mean^T), which is the moment-matched merge of the two. Combinational, no state. The
// paper names the unit only; the statistics form is this design's choice.
module gaussian_merge
  import gleanmer_pkg::*;
(
  input  pstats_t a,
  input  pstats_t b,
  output pstats_t m
);
  bbox_t box_u;
  logic  unused_ov, unused_in;
  bbox_t unused_pb;

  bbox_unit u_box (
    .a(a.box), .b(b.box), .p(a.box.lo),
    .union_ab(box_u), .overlap_ab(unused_ov), .a_contains_p(unused_in), .point_box(unused_pb)
  );

  always_comb begin
    m.col_s = (a.col_s < b.col_s) ? a.col_s : b.col_s;
    m.col_e = (a.col_e > b.col_e) ? a.col_e : b.col_e;
    m.n     = a.n + b.n;
    for (int i = 0; i < 3; i++) m.sum[i]   = a.sum[i] + b.sum[i];
    for (int i = 0; i < 6; i++) m.sumsq[i] = a.sumsq[i] + b.sumsq[i];
    m.box   = box_u;
  end
endmodule

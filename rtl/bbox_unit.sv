// bbox_unit: Bounding Box Unit of the Fusion & Regression engine.
//
// Axis-aligned bounding boxes are how the R-tree indexes Gaussians and how a batch of query
// coordinates is enclosed. This purely combinational unit returns, for boxes a and b and point
// p: the smallest box enclosing a and b (union), whether a and b overlap (closed intervals on all
// three axes), whether p lies in a, and the degenerate box of p. The architecture figure names
// the unit only; the operation set is chosen to serve batch querying and the R-tree search.
module bbox_unit
  import gleanmer_pkg::*;
(
  input  bbox_t a,
  input  bbox_t b,
  input  vec3_t p,
  output bbox_t union_ab,
  output logic  overlap_ab,
  output logic  a_contains_p,
  output bbox_t point_box
);
  function automatic coord_t cmin(coord_t u, coord_t v);
    return (u < v) ? u : v;
  endfunction
  function automatic coord_t cmax(coord_t u, coord_t v);
    return (u > v) ? u : v;
  endfunction

  always_comb begin
    union_ab.lo.x = cmin(a.lo.x, b.lo.x);
    union_ab.lo.y = cmin(a.lo.y, b.lo.y);
    union_ab.lo.z = cmin(a.lo.z, b.lo.z);
    union_ab.hi.x = cmax(a.hi.x, b.hi.x);
    union_ab.hi.y = cmax(a.hi.y, b.hi.y);
    union_ab.hi.z = cmax(a.hi.z, b.hi.z);
    overlap_ab = (a.lo.x <= b.hi.x) && (b.lo.x <= a.hi.x) &&
                 (a.lo.y <= b.hi.y) && (b.lo.y <= a.hi.y) &&
                 (a.lo.z <= b.hi.z) && (b.lo.z <= a.hi.z);
    a_contains_p = (p.x >= a.lo.x) && (p.x <= a.hi.x) &&
                   (p.y >= a.lo.y) && (p.y <= a.hi.y) &&
                   (p.z >= a.lo.z) && (p.z <= a.hi.z);
    point_box.lo = p;
    point_box.hi = p;
  end
endmodule

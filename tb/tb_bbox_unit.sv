// tb_bbox_unit: self-checking test of the Bounding Box Unit. Random boxes and points (with
// coordinates drawn from a small range so that overlaps and containment are frequent) are
// checked against union, overlap and containment computed here from integer coordinates.
module tb_bbox_unit;
  import gleanmer_pkg::*;
  bbox_t a, b, u, pb;
  vec3_t p;
  logic ov, cp;
  int checks = 0, failures = 0, n_ov = 0, n_cp = 0;

  bbox_unit dut (.a(a), .b(b), .p(p), .union_ab(u), .overlap_ab(ov), .a_contains_p(cp), .point_box(pb));

  function automatic int rc();
    return $urandom_range(0, 200) - 100;
  endfunction

  initial begin
    int alo[3], ahi[3], blo[3], bhi[3], pp[3], t;
    bit e_ov, e_cp;
    for (int n = 0; n < 2000; n++) begin
      for (int k = 0; k < 3; k++) begin
        alo[k] = rc(); ahi[k] = rc(); if (alo[k] > ahi[k]) begin t = alo[k]; alo[k] = ahi[k]; ahi[k] = t; end
        blo[k] = rc(); bhi[k] = rc(); if (blo[k] > bhi[k]) begin t = blo[k]; blo[k] = bhi[k]; bhi[k] = t; end
        pp[k] = rc();
      end
      a.lo.x = coord_t'(alo[0]); a.lo.y = coord_t'(alo[1]); a.lo.z = coord_t'(alo[2]);
      a.hi.x = coord_t'(ahi[0]); a.hi.y = coord_t'(ahi[1]); a.hi.z = coord_t'(ahi[2]);
      b.lo.x = coord_t'(blo[0]); b.lo.y = coord_t'(blo[1]); b.lo.z = coord_t'(blo[2]);
      b.hi.x = coord_t'(bhi[0]); b.hi.y = coord_t'(bhi[1]); b.hi.z = coord_t'(bhi[2]);
      p.x = coord_t'(pp[0]); p.y = coord_t'(pp[1]); p.z = coord_t'(pp[2]);
      #1;
      e_ov = 1; e_cp = 1;
      for (int k = 0; k < 3; k++) begin
        if (alo[k] > bhi[k] || blo[k] > ahi[k]) e_ov = 0;
        if (pp[k] < alo[k] || pp[k] > ahi[k]) e_cp = 0;
      end
      n_ov += e_ov; n_cp += e_cp;
      checks += 4;
      if (ov !== e_ov) failures++;
      if (cp !== e_cp) failures++;
      if (int'(u.lo.x) != (alo[0] < blo[0] ? alo[0] : blo[0]) || int'(u.hi.x) != (ahi[0] > bhi[0] ? ahi[0] : bhi[0]) ||
          int'(u.lo.y) != (alo[1] < blo[1] ? alo[1] : blo[1]) || int'(u.hi.y) != (ahi[1] > bhi[1] ? ahi[1] : bhi[1]) ||
          int'(u.lo.z) != (alo[2] < blo[2] ? alo[2] : blo[2]) || int'(u.hi.z) != (ahi[2] > bhi[2] ? ahi[2] : bhi[2])) failures++;
      if (pb.lo != p || pb.hi != p) failures++;
    end
    checks++;
    if (n_ov == 0 || n_cp == 0) failures++;  // both outcomes must have been exercised
    $display("overlaps=%0d contains=%0d", n_ov, n_cp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule

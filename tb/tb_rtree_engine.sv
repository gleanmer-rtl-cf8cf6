// tb_rtree_engine: self-checking test of the R-Tree Engine search.
// A two-level tree is placed in a memory model with random response latency: a root node with
// four child nodes, each holding four leaf entries (Gaussian pointers 100..115) on a grid of
// boxes. For random query boxes the set of returned pointers must equal the set of leaves whose
// box overlaps the query (computed here by brute force), and nodes_visited must equal 1 plus
// the number of child boxes that overlap. Output back-pressure is random.
module tb_rtree_engine;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  bbox_t qbox;
  ptr_t root = 13'd1;
  logic mreq_valid, mreq_ready = 0, mresp_valid = 0;
  ptr_t mreq_addr;
  logic [LINE_W-1:0] mresp_data = '0;
  logic out_valid, out_ready = 0;
  ptr_t out_ptr;
  logic [15:0] nodes_visited, stack_overflow;
  int checks = 0, failures = 0;
  logic [LINE_W-1:0] mem [int];
  bbox_t leaf_box [16], child_box [4];
  int hits [$];

  rtree_engine dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic bbox_t mkbox(int x0, int x1, int y0, int y1);
    bbox_t b;
    b.lo.x = coord_t'(x0); b.hi.x = coord_t'(x1);
    b.lo.y = coord_t'(y0); b.hi.y = coord_t'(y1);
    b.lo.z = 19'sd0;       b.hi.z = 19'sd100;
    return b;
  endfunction
  function automatic bit ov(bbox_t a, bbox_t b);
    return a.lo.x <= b.hi.x && b.lo.x <= a.hi.x && a.lo.y <= b.hi.y && b.lo.y <= a.hi.y &&
           a.lo.z <= b.hi.z && b.lo.z <= a.hi.z;
  endfunction

  // memory model: accept a request, answer after 1..3 cycles
  initial begin
    forever begin
      @(negedge clk);
      mresp_valid = 0;
      mreq_ready = ($urandom_range(0, 1) == 1);
      if (mreq_valid && mreq_ready) begin
        ptr_t a;
        a = mreq_addr;
        @(negedge clk); mreq_ready = 0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        mresp_valid = 1; mresp_data = mem.exists(int'(a)) ? mem[int'(a)] : '0;
      end
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (out_valid && out_ready) hits.push_back(int'(out_ptr));

  initial begin
    rt_node_t rn, cn;
    rn = '0;
    for (int c = 0; c < 4; c++) begin
      child_box[c] = mkbox(c * 1000, c * 1000 + 900, 0, 900);
      cn = '0;
      for (int l = 0; l < 4; l++) begin
        leaf_box[c*4+l] = mkbox(c * 1000 + l * 200, c * 1000 + l * 200 + 250, l * 150, l * 150 + 400);
        cn[l].box = leaf_box[c*4+l]; cn[l].leaf = 1'b1; cn[l].ptr = ptr_t'(100 + c*4 + l);
      end
      mem[2 + c] = LINE_W'(cn);
      rn[c].box = child_box[c]; rn[c].leaf = 1'b0; rn[c].ptr = ptr_t'(2 + c);
    end
    mem[1] = LINE_W'(rn);
    qbox = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int x0, y0, nexp_nodes;
      int exp_h [$];
      x0 = $urandom_range(0, 4200) - 200; y0 = $urandom_range(0, 1000) - 100;
      qbox = mkbox(x0, x0 + $urandom_range(0, 800), y0, y0 + $urandom_range(0, 300));
      if (n % 7 == 0) qbox.lo.z = 19'sd200;   // empty in z: only the root is read
      if (qbox.lo.z > qbox.hi.z) qbox.hi.z = qbox.lo.z;
      nexp_nodes = 1;
      exp_h.delete();
      for (int c = 0; c < 4; c++) if (ov(child_box[c], qbox)) begin
        nexp_nodes++;
        for (int l = 0; l < 4; l++) if (ov(leaf_box[c*4+l], qbox)) exp_h.push_back(100 + c*4 + l);
      end
      hits.delete();
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      @(negedge clk);
      hits.sort(); exp_h.sort();
      checks += 2;
      if (hits != exp_h) begin failures++; $display("query %0d: %0d hits, exp %0d", n, hits.size(), exp_h.size()); end
      if (int'(nodes_visited) != nexp_nodes) begin failures++; $display("nodes %0d exp %0d", nodes_visited, nexp_nodes); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mem_allocator: self-checking test of the Memory Allocator (small region: lines 1..20,
// four-entry free stack). Allocates the whole region (each line once, then alloc_ok must
// fall), frees six lines (four recycled, two leaked), re-allocates the recycled ones in LIFO
// order, and checks that a free and an allocation in the same cycle hand over the freed line.
module tb_mem_allocator;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0, alloc_req = 0, alloc_ok, free_req = 0;
  ptr_t alloc_ptr, free_ptr = '0;
  logic [PTR_W:0] in_use;
  logic [31:0] leaked;
  int checks = 0, failures = 0;

  mem_allocator #(.FIRST(1), .LAST(20), .FREE_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic alloc(output int p, output bit ok);
    @(negedge clk);
    alloc_req = 1; #1; p = int'(alloc_ptr); ok = alloc_ok;
    @(posedge clk); @(negedge clk); alloc_req = 0;
  endtask
  task automatic free_line(int p);
    @(negedge clk);
    free_req = 1; free_ptr = ptr_t'(p);
    @(posedge clk); @(negedge clk); free_req = 0;
  endtask

  initial begin
    int p; bit ok;
    bit seen [int];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      alloc(p, ok);
      checks++;
      if (!ok || p < 1 || p > 20 || seen.exists(p)) failures++;
      seen[p] = 1;
    end
    alloc(p, ok);
    checks += 2;
    if (ok) failures++;
    if (in_use != 20) failures++;
    for (int i = 3; i <= 8; i++) free_line(i);
    checks += 2;
    if (leaked != 2) failures++;
    if (in_use != 14) failures++;
    for (int i = 6; i >= 3; i--) begin
      alloc(p, ok);
      checks++;
      if (!ok || p != i) begin failures++; $display("got %0d exp %0d", p, i); end
    end
    alloc(p, ok);
    checks++;
    if (ok) failures++;
    // same-cycle free and allocate
    @(negedge clk);
    free_req = 1; free_ptr = 13'd17; alloc_req = 1; #1;
    checks += 2;
    if (!alloc_ok || alloc_ptr != 13'd17) failures++;
    @(posedge clk); @(negedge clk); free_req = 0; alloc_req = 0;
    if (in_use != 18) begin failures++; $display("in_use %0d", in_use); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

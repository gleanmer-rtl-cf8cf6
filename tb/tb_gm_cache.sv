// tb_gm_cache: self-checking test of the 44 KB map cache against an AXI-4 memory model.
// Checks: read data (hits and misses) against a reference; a repeated read hits and answers two
// cycles after acceptance; write-through (the memory model holds the written line and a later
// read returns it); that 11 lines of one set all stay resident while a 12th evicts the oldest
// (round-robin); hit/miss counters against the number of AXI reads; and invalidation.
module tb_gm_cache;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0, inv = 0;
  logic req_valid = 0, req_we = 0, req_ready, resp_valid;
  ptr_t req_addr = '0;
  logic [LINE_W-1:0] req_wdata = '0, resp_rdata;
  axi_req_t axi_o;
  axi_rsp_t axi_i;
  logic [31:0] hits, misses;
  int n_reads, n_writes;
  int checks = 0, failures = 0;
  logic [LINE_W-1:0] model [int];

  gm_cache dut (.*);
  axi_mem_model mem (.clk(clk), .s_i(axi_o), .s_o(axi_i), .n_reads(n_reads), .n_writes(n_writes));
  always #5 clk = ~clk;

  initial begin
    #10000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic logic [LINE_W-1:0] expv(int a);
    return model.exists(a) ? model[a] : LINE_W'(a);
  endfunction

  task automatic access(int a, bit w, output int lat);
    logic [LINE_W-1:0] d;
    d = {$urandom, $urandom, $urandom, $urandom} ^ LINE_W'(a);
    @(negedge clk);
    req_valid = 1; req_we = w; req_addr = ptr_t'(a); req_wdata = d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    if (w) model[a] = d;
    else begin
      checks++;
      if (resp_rdata !== expv(a)) begin failures++; $display("read %0d wrong", a); end
    end
  endtask

  initial begin
    int lat, h0, m0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // miss then hit
    access(77, 0, lat);
    h0 = hits;
    access(77, 0, lat);
    checks += 2;
    if (hits != h0 + 1) failures++;
    if (lat != 2) begin failures++; $display("hit latency %0d", lat); end
    // write-through
    access(77, 1, lat);
    access(77, 0, lat);
    checks++;
    if (mem.peek(77) !== model[77]) failures++;
    // 11 ways of set 5: lines 5 + 64k
    for (int k = 0; k < 11; k++) access(5 + 64 * k, 0, lat);
    m0 = misses;
    for (int k = 0; k < 11; k++) access(5 + 64 * k, 0, lat);
    checks++;
    if (misses != m0) begin failures++; $display("resident set missed %0d", misses - m0); end
    access(5 + 64 * 11, 0, lat);   // evicts the first filled way (line 5)
    m0 = misses;
    access(5 + 64 * 3, 0, lat);
    access(5, 0, lat);
    checks++;
    if (misses != m0 + 1) begin failures++; $display("eviction misses %0d", misses - m0); end
    // random traffic
    for (int n = 0; n < 400; n++) begin
      int a;
      a = $urandom_range(0, 300);
      access(a, $urandom_range(0, 3) == 0, lat);
    end
    checks++;
    if (misses != n_reads) begin failures++; $display("misses %0d axi reads %0d", misses, n_reads); end
    // invalidate
    @(negedge clk); inv = 1;
    @(negedge clk); inv = 0;
    m0 = misses;
    access(77, 0, lat);
    checks++;
    if (misses != m0 + 1) failures++;
    $display("hits=%0d misses=%0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

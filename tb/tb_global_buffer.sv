// tb_global_buffer: self-checking test of the 512 KB global buffer as an AXI-4 subordinate.
// Random single-beat writes with random byte strobes and random reads over the whole address
// range, with random R/B back-pressure, against a reference model; checks that a read answers
// one cycle after its address handshake and that the top and bottom lines are reachable.
module tb_global_buffer;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0;
  axi_req_t s_i;
  axi_rsp_t s_o;
  int checks = 0, failures = 0;
  logic [LINE_W-1:0] model [int];

  global_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  function automatic logic [LINE_W-1:0] rnd_line();
    logic [LINE_W-1:0] l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic wr(int line, logic [LINE_W-1:0] d, logic [63:0] strb);
    logic [LINE_W-1:0] old;
    @(negedge clk);
    s_i.aw_valid = 1; s_i.aw_addr = 32'(line) << 6; s_i.w_valid = 1; s_i.w_data = d; s_i.w_strb = strb;
    @(posedge clk);
    while (!(s_o.aw_ready && s_o.w_ready)) @(posedge clk);
    @(negedge clk); s_i.aw_valid = 0; s_i.w_valid = 0;
    s_i.b_ready = ($urandom_range(0, 1) == 1);
    while (!(s_o.b_valid && s_i.b_ready)) begin
      @(negedge clk); s_i.b_ready = ($urandom_range(0, 1) == 1);
    end
    @(posedge clk);
    @(negedge clk); s_i.b_ready = 0;
    old = model.exists(line) ? model[line] : '0;
    for (int b = 0; b < 64; b++) if (strb[b]) old[b*8 +: 8] = d[b*8 +: 8];
    model[line] = old;
  endtask

  task automatic rd(int line);
    int lat;
    @(negedge clk);
    s_i.ar_valid = 1; s_i.ar_addr = (32'(line) << 6) | 32'($urandom_range(0, 63));
    @(posedge clk);
    while (!s_o.ar_ready) @(posedge clk);
    @(negedge clk); s_i.ar_valid = 0;
    checks++;
    if (!s_o.r_valid) failures++;  // data one cycle after the address handshake
    s_i.r_ready = ($urandom_range(0, 1) == 1);
    while (!(s_o.r_valid && s_i.r_ready)) begin
      @(negedge clk); s_i.r_ready = ($urandom_range(0, 1) == 1);
    end
    checks++;
    if (s_o.r_data !== model[line] || s_o.r_resp != AXI_OKAY) begin
      failures++; $display("line %0d mismatch", line);
    end
    @(posedge clk);
    @(negedge clk); s_i.r_ready = 0;
  endtask

  initial begin
    int lines [$];
    s_i = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    lines.push_back(0); lines.push_back(8191);
    for (int i = 0; i < 30; i++) lines.push_back($urandom_range(0, 8191));
    foreach (lines[i]) wr(lines[i], rnd_line(), '1);
    for (int n = 0; n < 200; n++) begin
      int l;
      l = lines[$urandom_range(0, lines.size() - 1)];
      if ($urandom_range(0, 1)) wr(l, rnd_line(), {$urandom, $urandom});
      else rd(l);
    end
    foreach (lines[i]) rd(lines[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// axi_mem_model: behavioural AXI-4 subordinate for testbenches (single-beat 512-bit subset).
// Holds lines in a sparse array (unwritten lines read as LINE_W'(address)), answers with a
// random delay of 0..MAX_LAT cycles and random address-ready, and counts reads and writes.
module axi_mem_model
  import gleanmer_pkg::*;
#(
  parameter int MAX_LAT = 3
) (
  input  logic     clk,
  input  axi_req_t s_i,
  output axi_rsp_t s_o,
  output int       n_reads,
  output int       n_writes
);
  logic [LINE_W-1:0] mem [int];

  function automatic logic [LINE_W-1:0] peek(int line);
    return mem.exists(line) ? mem[line] : LINE_W'(line);
  endfunction

  initial begin
    s_o = '0; n_reads = 0; n_writes = 0;
    forever begin
      @(negedge clk);
      s_o.ar_ready = ($urandom_range(0, 1) == 1) && s_i.ar_valid;
      s_o.aw_ready = ($urandom_range(0, 1) == 1) && s_i.aw_valid && s_i.w_valid;
      s_o.w_ready  = s_o.aw_ready;
      @(posedge clk);
      if (s_i.ar_valid && s_o.ar_ready) begin
        int line;
        line = int'(s_i.ar_addr >> 6);
        @(negedge clk); s_o.ar_ready = 0;
        repeat ($urandom_range(0, MAX_LAT)) @(negedge clk);
        s_o.r_valid = 1; s_o.r_data = peek(line); s_o.r_resp = AXI_OKAY;
        n_reads++;
        @(posedge clk);
        while (!s_i.r_ready) @(posedge clk);
        @(negedge clk); s_o.r_valid = 0;
      end else if (s_i.aw_valid && s_o.aw_ready) begin
        int line;
        line = int'(s_i.aw_addr >> 6);
        mem[line] = s_i.w_data;
        @(negedge clk); s_o.aw_ready = 0; s_o.w_ready = 0;
        repeat ($urandom_range(0, MAX_LAT)) @(negedge clk);
        s_o.b_valid = 1; s_o.b_resp = AXI_OKAY;
        n_writes++;
        @(posedge clk);
        while (!s_i.b_ready) @(posedge clk);
        @(negedge clk); s_o.b_valid = 0;
      end
    end
  end
endmodule

// tb_axi_bus: self-checking test of the shared AXI-4 bus with two managers and two
// subordinates (memory models at 0x0000_0000 and 0x0001_0000, 64 KB windows). Both managers
// issue random reads and writes at the same time to lines of their own in both windows; every
// read must return the line that manager last wrote there (so routing in both directions is
// right), an address outside both windows must get DECERR, and both managers must finish
// (round-robin arbitration does not starve either).
module tb_axi_bus;
  import gleanmer_pkg::*;
  logic clk = 0, rst_n = 0;
  axi_req_t m_req [2];
  axi_rsp_t m_rsp [2];
  axi_req_t s_req [2];
  axi_rsp_t s_rsp [2];
  int nr [2], nw [2];
  int checks = 0, failures = 0, decerr_seen = 0;
  int done_cnt = 0;

  axi_bus #(.NM(2), .NS(2), .SLV_BASE({32'h0001_0000, 32'h0000_0000}),
            .SLV_MASK({32'hffff_0000, 32'hffff_0000})) dut (.*);
  axi_mem_model s0 (.clk(clk), .s_i(s_req[0]), .s_o(s_rsp[0]), .n_reads(nr[0]), .n_writes(nw[0]));
  axi_mem_model s1 (.clk(clk), .s_i(s_req[1]), .s_o(s_rsp[1]), .n_reads(nr[1]), .n_writes(nw[1]));
  always #5 clk = ~clk;

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic manager(int m);
    logic [LINE_W-1:0] model [int];
    for (int n = 0; n < 150; n++) begin
      logic [31:0] addr;
      bit wr;
      int k;
      k = $urandom_range(0, 9);
      if (k == 9) addr = 32'h8000_0000;
      else addr = ($urandom_range(0, 1) ? 32'h0001_0000 : 32'h0) + 32'((m * 16 + $urandom_range(0, 15)) << 6);
      wr = $urandom_range(0, 1);
      if (wr) begin
        logic [LINE_W-1:0] d;
        d = {$urandom, $urandom, $urandom, 32'(m), 32'(n)};
        @(negedge clk);
        m_req[m].aw_valid = 1; m_req[m].aw_addr = addr; m_req[m].w_valid = 1; m_req[m].w_data = d; m_req[m].w_strb = '1;
        m_req[m].b_ready = 1;
        fork
          begin @(posedge clk); while (!m_rsp[m].aw_ready) @(posedge clk); @(negedge clk); m_req[m].aw_valid = 0; end
          begin @(posedge clk); while (!m_rsp[m].w_ready) @(posedge clk); @(negedge clk); m_req[m].w_valid = 0; end
        join
        do @(posedge clk); while (!m_rsp[m].b_valid);
        checks++;
        if (addr == 32'h8000_0000) begin
          decerr_seen++;
          if (m_rsp[m].b_resp != AXI_DECERR) failures++;
        end else begin
          if (m_rsp[m].b_resp != AXI_OKAY) failures++;
          model[addr] = d;
        end
        @(negedge clk); m_req[m].b_ready = 0;
      end else begin
        @(negedge clk);
        m_req[m].ar_valid = 1; m_req[m].ar_addr = addr; m_req[m].r_ready = 1;
        @(posedge clk); while (!m_rsp[m].ar_ready) @(posedge clk);
        @(negedge clk); m_req[m].ar_valid = 0;
        do @(posedge clk); while (!m_rsp[m].r_valid);
        checks++;
        if (addr == 32'h8000_0000) begin
          decerr_seen++;
          if (m_rsp[m].r_resp != AXI_DECERR) failures++;
        end else if (model.exists(addr) && m_rsp[m].r_data !== model[addr]) begin
          failures++; $display("manager %0d read %h wrong", m, addr);
        end else if (!model.exists(addr) && m_rsp[m].r_data !== LINE_W'(addr >> 6)) begin
          failures++; $display("manager %0d read %h (unwritten) wrong", m, addr);
        end
        @(negedge clk); m_req[m].r_ready = 0;
      end
    end
    done_cnt++;
  endtask

  initial begin
    m_req[0] = '0; m_req[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      manager(0);
      manager(1);
    join
    checks += 3;
    if (done_cnt != 2) failures++;
    if (decerr_seen == 0) failures++;
    if (nr[0] + nr[1] == 0 || nw[0] + nw[1] == 0 || nr[1] == 0) failures++;
    $display("reads %0d/%0d writes %0d/%0d decerr %0d", nr[0], nr[1], nw[0], nw[1], decerr_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gm_sram: self-checking test of the SRAM model. Random writes and reads against a
// reference array; checks the one-cycle read latency, that rdata holds between reads, and that
// a read of the address being written returns the old word.
module tb_gm_sram;
  localparam int W = 40, DEPTH = 100;
  logic clk = 0, we = 0, re = 0;
  logic [6:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  gm_sram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_d;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 7'(i); wdata = {$urandom, $urandom} & {W{1'b1}};
      ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      raddr = 7'($urandom_range(0, DEPTH - 1)); re = 1;
      we = $urandom_range(0, 1); waddr = ($urandom_range(0, 3) == 0) ? raddr : 7'($urandom_range(0, DEPTH - 1));
      wdata = {$urandom, $urandom} & {W{1'b1}};
      exp_d = ref_mem[raddr];
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      checks++;
      if (rdata !== exp_d) begin
        failures++;
        $display("read %0d got %h exp %h", raddr, rdata, exp_d);
      end
      // hold check: no read next cycle
      @(negedge clk); re = 0; we = 0;
      @(posedge clk); #1;
      checks++;
      if (rdata !== exp_d) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_depth_decoder: self-checking test of the Depth Decoder. Streams two small frames of random
// raw depths (some zero, some large enough to overflow the coordinate range) with random gaps
// on the input and random back-pressure on the output, and checks every decoded pixel, its
// column/row and the eol/eof flags against values computed here. Then checks that the queue
// accepts exactly 2560 pixels (5 KB) while the output is stalled, and that with no gaps it
// passes one pixel per cycle.
module tb_depth_decoder;
  import gleanmer_pkg::*;
  localparam int IW = 8, IH = 3;
  logic clk = 0, rst_n = 0;
  logic [15:0] depth_scale = 16'h0180;  // x1.5
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_eol, out_eof;
  logic [15:0] in_raw = 0;
  coord_t out_depth;
  logic [9:0] out_col, out_row;
  int checks = 0, failures = 0;
  int raw_q [$];
  int n_out = 0;
  bit rand_ready = 1;

  depth_decoder #(.IMG_W(IW), .IMG_H(IH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int r, e, col, row;
    r = raw_q.pop_front();
    e = (r * 384) >> 8;
    if (r == 0 || e > 262143) e = 0;
    col = n_out % IW; row = (n_out / IW) % IH;
    checks++;
    if (int'(out_depth) != e || int'(out_col) != col || int'(out_row) != row ||
        out_eol != (col == IW - 1) || out_eof != (col == IW - 1 && row == IH - 1)) begin
      failures++;
      $display("pix %0d: got d=%0d c=%0d r=%0d exp d=%0d c=%0d r=%0d", n_out, out_depth, out_col, out_row, e, col, row);
    end
    n_out++;
  end
  always @(negedge clk) out_ready <= rand_ready ? ($urandom_range(0, 3) != 0) : out_ready;

  initial begin
    int sent, cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    sent = 0;
    while (sent < 2 * IW * IH) begin
      @(negedge clk);
      if (in_valid && in_ready) ;  // accepted at the previous edge
      in_valid = ($urandom_range(0, 2) != 0);
      case ($urandom_range(0, 4))
        0: in_raw = 16'd0;
        1: in_raw = 16'hffff;
        default: in_raw = 16'($urandom_range(1, 60000));
      endcase
      @(posedge clk);
      if (in_valid && in_ready) begin raw_q.push_back(int'(in_raw)); sent++; end
    end
    @(negedge clk); in_valid = 0;
    repeat (200) @(negedge clk);
    checks++; if (n_out != 2 * IW * IH) failures++;
    // capacity: stall the output and fill
    rand_ready = 0; out_ready = 0;
    @(negedge clk);
    sent = 0;
    in_valid = 1; in_raw = 16'd7;
    while (in_ready && sent < 3000) begin
      @(posedge clk); sent++; raw_q.push_back(7);
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (sent != 2560) begin failures++; $display("capacity %0d", sent); end
    // throughput: drain with out_ready always high while refilling
    n_out = 0;
    out_ready = 1; in_valid = 1;
    cyc = 0;
    while (n_out < 2560 + 100) begin
      @(posedge clk); if (in_valid && in_ready) raw_q.push_back(7);
      cyc++;
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (cyc != 2660) begin failures++; $display("cycles %0d", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// depth_decoder: Depth Decoder of the Gaussian Generation engine.
//
// Raw depth pixels arrive from the external I/Os as a stream of 16-bit words, row by row, in
// raster order. They are queued in a 5 KB buffer (2560 x 16 bit, four 640-pixel rows) so that
// bursts from the I/O side and stalls of the segmentation pipeline do not lose data. At the
// output each pixel is decoded into a depth coordinate, depth = raw * depth_scale (Q8.8), in
// coordinate units (1/256 m); a raw value of 0 (no return) or a result beyond the coordinate
// range is passed on as depth 0, which downstream means "invalid pixel". The decoder also
// attaches the pixel's column and row and flags the last pixel of a row (eol) and of the
// image (eof).
//
// Interface: valid/ready on both sides. Timing: the queue is first-word-fall-through; a pixel
// written into an empty queue is offered at the output the next cycle; one pixel per cycle in
// and out. The buffer size is the figure's 5 KB; its use as a FIFO and the decoding formula are
// this design's own choices (the paper names the block and its buffer only).
module depth_decoder
  import gleanmer_pkg::*;
#(
  parameter int unsigned IMG_W     = 640,
  parameter int unsigned IMG_H     = 480,
  parameter int unsigned BUF_BYTES = 5 * 1024,
  localparam int unsigned DEPTH    = BUF_BYTES / 2,
  localparam int unsigned AW       = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] depth_scale,
  input  logic        in_valid,
  input  logic [15:0] in_raw,
  output logic        in_ready,
  output logic        out_valid,
  output coord_t      out_depth,
  output logic [9:0]  out_col,
  output logic [9:0]  out_row,
  output logic        out_eol,
  output logic        out_eof,
  input  logic        out_ready
);
  logic [15:0]  buf_q [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          push, pop;
  logic [31:0]   scaled;
  localparam logic [31:0] COORD_MAX = 32'((1 << (COORD_W - 1)) - 1);

  assign in_ready  = (32'(count) < DEPTH);
  assign out_valid = (count != 0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_comb begin
    scaled    = (32'(buf_q[rptr]) * 32'(depth_scale)) >> 8;
    out_depth = (buf_q[rptr] == 16'd0 || scaled > COORD_MAX) ? '0 : coord_t'(scaled);
    out_eol   = (32'(out_col) == IMG_W - 1);
    out_eof   = out_eol && (32'(out_row) == IMG_H - 1);
  end

  always_ff @(posedge clk) begin
    if (push) buf_q[wptr] <= in_raw;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr    <= '0;
      rptr    <= '0;
      count   <= '0;
      out_col <= '0;
      out_row <= '0;
    end else begin
      if (push) wptr <= (32'(wptr) == DEPTH - 1) ? '0 : wptr + 1'b1;
      if (pop) begin
        rptr <= (32'(rptr) == DEPTH - 1) ? '0 : rptr + 1'b1;
        if (out_eol) begin
          out_col <= '0;
          out_row <= out_eof ? '0 : out_row + 1'b1;
        end else begin
          out_col <= out_col + 1'b1;
        end
      end
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end
endmodule

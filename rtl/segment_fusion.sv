// segment_fusion: Segment Fusion (SF) Unit with its Line Segment Buffer.
//
// Merges the line segments of successive image rows into local occupied Gaussians, one per
// obstacle. The Line Segment Buffer (10 KB, a gm_sram) holds the Gaussians still open at the
// previous row; segments of the row being processed are written to the other half, and the two
// halves swap roles at each row end, so only one row of segments is kept besides the row being
// built. A Gaussian is open while some segment of the next row continues it.
//
// Segments arrive in column order. For each new segment the unit walks the previous row's open
// Gaussians with a pointer that only moves forward:
//   - an open Gaussian ending left of the new segment can no longer be continued: it is closed
//     and output;
//   - if the next open Gaussian overlaps the new segment in columns and their depth ranges come
//     within fuse_thr, the two are merged (gaussian_merge, exact on sufficient statistics) and
//     the result is stored as open in the current row;
//   - otherwise the segment starts a new open Gaussian.
// At a row end the open Gaussians not continued are closed and output; at a frame end every
// Gaussian still open is output as well. If one row holds more Gaussians than half the buffer,
// the excess ones are output at once as closed (counted in overflow_cnt).
// The paper states what SF does and the size of the buffer; the matching rule, the two-halves
// organisation and the one-match-per-segment simplification are this design's own.
//
// Timing: 2 to 3 cycles per segment plus one read per previous-row Gaussian and one cycle per
// output; in_ready is high only in the idle state. Outputs use valid/ready.
module segment_fusion
  import gleanmer_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 10 * 1024,
  localparam int unsigned W        = $bits(pstats_t),
  localparam int unsigned DEPTH    = (BUF_BYTES * 8) / W,
  localparam int unsigned HALF     = DEPTH / 2,
  localparam int unsigned AW       = $clog2(DEPTH),
  localparam int unsigned CW       = $clog2(HALF + 1)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      fuse_thr,
  input  logic        in_valid,
  input  logic        in_seg_valid,
  input  pstats_t     in_seg,
  input  logic        in_row_end,
  input  logic        in_frame_end,
  output logic        in_ready,
  output logic        out_valid,
  output pstats_t     out_g,
  input  logic        out_ready,
  output logic [31:0] overflow_cnt,
  output logic [31:0] merge_cnt
);
  typedef enum logic [2:0] {
    S_IDLE, S_SEG_RD, S_SEG_CMP, S_SEG_WR, S_FL_RD, S_FL_EMIT, S_WAIT
  } state_t;
  state_t state, ret;

  pstats_t cur, prev, merged;
  logic    row_end, frame_end, frame_flush;
  logic    pb;                 // half holding the previous row
  logic [CW-1:0] pc, pi, cc;   // previous-row count, previous-row pointer, current-row count

  logic          we, re;
  logic [AW-1:0] waddr, raddr;
  pstats_t       rdata;

  gm_sram #(.W(W), .DEPTH(DEPTH)) u_lsb (
    .clk(clk), .we(we), .waddr(waddr), .wdata(cur), .re(re), .raddr(raddr), .rdata(rdata)
  );

  gaussian_merge u_merge (.a(rdata), .b(cur), .m(merged));

  logic col_overlap, depth_close, left_of;
  always_comb begin
    prev        = rdata;
    left_of     = prev.col_e < cur.col_s;
    col_overlap = (prev.col_s <= cur.col_e) && (cur.col_s <= prev.col_e);
    depth_close = (32'(prev.box.lo.z) - 32'(fuse_thr) <= 32'(cur.box.hi.z)) &&
                  (32'(cur.box.lo.z) - 32'(fuse_thr) <= 32'(prev.box.hi.z));
  end

  assign in_ready = (state == S_IDLE);

  always_comb begin
    re    = (state == S_SEG_RD || state == S_FL_RD) && (pi < pc);
    raddr = AW'((pb ? HALF : 0) + 32'(pi));
    we    = (state == S_SEG_WR) && (32'(cc) < HALF);
    waddr = AW'((pb ? 0 : HALF) + 32'(cc));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret <= S_IDLE;
      cur <= '0; row_end <= 1'b0; frame_end <= 1'b0; frame_flush <= 1'b0;
      pb <= 1'b0; pc <= '0; pi <= '0; cc <= '0;
      out_valid <= 1'b0; out_g <= '0;
      overflow_cnt <= '0; merge_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          cur       <= in_seg;
          row_end   <= in_row_end;
          frame_end <= in_frame_end;
          state     <= in_seg_valid ? S_SEG_RD : (in_row_end ? S_FL_RD : S_IDLE);
        end
        S_SEG_RD: state <= (pi < pc) ? S_SEG_CMP : S_SEG_WR;
        S_SEG_CMP: begin
          if (left_of) begin
            out_valid <= 1'b1; out_g <= prev;
            pi <= pi + 1'b1;
            state <= S_WAIT; ret <= S_SEG_RD;
          end else if (col_overlap && depth_close) begin
            cur <= merged;
            pi <= pi + 1'b1;
            merge_cnt <= merge_cnt + 1;
            state <= S_SEG_WR;
          end else begin
            state <= S_SEG_WR;
          end
        end
        S_SEG_WR: begin
          if (32'(cc) < HALF) begin
            cc <= cc + 1'b1;
            state <= row_end ? S_FL_RD : S_IDLE;
          end else begin
            out_valid <= 1'b1; out_g <= cur;
            overflow_cnt <= overflow_cnt + 1;
            state <= S_WAIT; ret <= row_end ? S_FL_RD : S_IDLE;
          end
        end
        S_FL_RD: begin
          if (pi < pc) begin
            state <= S_FL_EMIT;
          end else if (frame_flush) begin
            // every Gaussian of the last row has been output
            pc <= '0; pi <= '0; frame_flush <= 1'b0;
            state <= S_IDLE;
          end else begin
            pb <= ~pb; pc <= cc; cc <= '0; pi <= '0;
            if (frame_end) begin
              frame_flush <= 1'b1;
              state <= S_FL_RD;
            end else begin
              state <= S_IDLE;
            end
          end
        end
        S_FL_EMIT: begin
          out_valid <= 1'b1; out_g <= prev;
          pi <= pi + 1'b1;
          state <= S_WAIT; ret <= S_FL_RD;
        end
        S_WAIT: if (out_ready) begin
          out_valid <= 1'b0;
          state <= ret;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_g));
endmodule

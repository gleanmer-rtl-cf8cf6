// gaussian_regression: Gaussian Regression Unit, time-interleaved over a batch of coordinates.
//
// Computes the occupancy probability of up to BATCH query coordinates from the Gaussians that
// overlap them. For batch querying every retrieved Gaussian is presented once per coordinate of
// the batch, one (Gaussian, coordinate slot) pair per cycle, so one datapath serves the whole
// batch; the only per-coordinate state is a pair of accumulators per slot (the "registers
// storing intermediate results" of batch querying).
//
// Per pair: the Gaussian Distance Unit gives the squared Mahalanobis distance q of the
// coordinate (1 cycle); the Gaussian's contribution is w = weight * exp(-q/2), evaluated as
// 2^-(q*log2(e)/2) with the integer part of the exponent as a shift and the fractional part f
// by the linear approximation 2^-f ~ 1 - f/2 (1 cycle); w is added to den[slot] and, for an
// occupied Gaussian, to num[slot] (1 cycle). After the last pair, finalize computes for each
// slot p = (num + prior/2) / (den + prior) in Q0.16 with a 17-cycle restoring divider, so a
// coordinate with no nearby Gaussian reads 0.5 (unexplored). The mixture-regression form, the
// exponential approximation and the prior are this design's choices: the paper states only that
// regression evaluates the overlapping Gaussians of a coordinate and time-interleaves them over
// the batch.
//
// Interface: c_we/c_idx/c_val load the coordinate registers; clear zeroes the accumulators;
// in_valid/in_slot/in_g stream pairs (accepted whenever in_ready); fin_start with fin_n starts
// the output of fin_n probabilities on out_valid/out_slot/out_prob (valid/ready). busy is high
// from the first pair until the last probability is taken.
module gaussian_regression
  import gleanmer_pkg::*;
#(
  parameter int unsigned BATCH = 16,
  localparam int unsigned SW    = $clog2(BATCH),
  localparam int unsigned ACC_W = 48
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [31:0]   prior,
  input  logic          c_we,
  input  logic [SW-1:0] c_idx,
  input  vec3_t         c_val,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [SW-1:0] in_slot,
  input  gaussian_t     in_g,
  output logic          in_ready,
  input  logic          fin_start,
  input  logic [SW:0]   fin_n,
  output logic          out_valid,
  output logic [SW-1:0] out_slot,
  output logic [15:0]   out_prob,
  input  logic          out_ready,
  output logic          busy
);
  vec3_t coord [BATCH];
  logic [ACC_W-1:0] num [BATCH];
  logic [ACC_W-1:0] den [BATCH];

  always_ff @(posedge clk) begin
    if (c_we) coord[c_idx] <= c_val;
  end

  // ---- stage A: distance ----
  localparam int unsigned TAG_W = SW + 1 + 16;
  logic             a_valid;
  logic [79:0]      a_q;
  logic [TAG_W-1:0] a_tag;
  gaussian_distance #(.TAG_W(TAG_W)) u_dist (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid && in_ready), .x(coord[in_slot]),
    .mu(in_g.mean), .prec(in_g.prec), .in_tag({in_slot, in_g.occ, in_g.weight}),
    .out_valid(a_valid), .out_q(a_q), .out_tag(a_tag)
  );

  // ---- stage B: weight = weight * 2^-(q*log2(e)/2) ----
  localparam logic [15:0] HALF_LOG2E = 16'd47274;   // round(0.5*log2(e) * 2^16)
  logic [53:0] t;
  logic [21:0] k_int;
  logic [15:0] f16;
  logic [16:0] mant;
  logic [47:0] w_c;
  always_comb begin
    t     = (a_q[79:38] != 0) ? '1 : (54'(a_q[37:0]) * 54'(HALF_LOG2E)) >> 16;
    k_int = t[53:32];
    f16   = t[31:16];
    mant  = 17'd65536 - 17'(f16 >> 1);
    w_c   = (k_int >= 22'd40) ? '0 : ((48'(a_tag[15:0]) * 48'(mant)) >> k_int);
  end

  logic          b_valid, b_occ;
  logic [SW-1:0] b_slot;
  logic [47:0]   b_w;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_valid <= 1'b0; b_occ <= 1'b0; b_slot <= '0; b_w <= '0;
    end else begin
      b_valid <= a_valid;
      b_w     <= w_c;
      b_occ   <= a_tag[16];
      b_slot  <= a_tag[TAG_W-1:17];
    end
  end

  // ---- stage C: accumulate; finalize ----
  typedef enum logic [1:0] { F_IDLE, F_LOAD, F_DIV, F_OUT } fstate_t;
  fstate_t fs;
  logic [SW:0]      fslot, fn;
  logic [ACC_W+1:0] r, dd;
  logic [16:0]      qv;
  logic [4:0]       it;

  assign in_ready = (fs == F_IDLE) && !fin_start;
  assign busy     = (fs != F_IDLE) || a_valid || b_valid;
  assign out_slot = SW'(fslot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < BATCH; i++) begin num[i] <= '0; den[i] <= '0; end
      fs <= F_IDLE; fslot <= '0; fn <= '0; r <= '0; dd <= '0; qv <= '0; it <= '0;
      out_valid <= 1'b0; out_prob <= '0;
    end else begin
      if (clear) begin
        for (int i = 0; i < BATCH; i++) begin num[i] <= '0; den[i] <= '0; end
      end else if (b_valid) begin
        den[b_slot] <= den[b_slot] + b_w;
        if (b_occ) num[b_slot] <= num[b_slot] + b_w;
      end
      unique case (fs)
        F_IDLE: if (fin_start) begin
          fslot <= '0; fn <= fin_n;
          fs <= (fin_n == 0) ? F_IDLE : F_LOAD;
        end
        F_LOAD: if (!a_valid && !b_valid) begin  // wait for pairs still in flight
          r  <= (ACC_W+2)'(num[SW'(fslot)]) + (ACC_W+2)'(prior >> 1);
          dd <= (ACC_W+2)'(den[SW'(fslot)]) + (ACC_W+2)'(prior);
          qv <= '0; it <= '0;
          fs <= F_DIV;
        end
        F_DIV: begin
          if (r >= dd) begin
            r  <= (r - dd) << 1;
            qv <= {qv[15:0], 1'b1};
          end else begin
            r  <= r << 1;
            qv <= {qv[15:0], 1'b0};
          end
          it <= it + 1'b1;
          if (it == 5'd16) fs <= F_OUT;
        end
        F_OUT: begin
          if (!out_valid) begin
            out_valid <= 1'b1;
            out_prob  <= (dd == 0) ? 16'h8000 : (qv[16] ? 16'hffff : qv[15:0]);
          end else if (out_ready) begin
            out_valid <= 1'b0;
            fslot <= fslot + 1'b1;
            fs <= (fslot + 1'b1 == fn) ? F_IDLE : F_LOAD;
          end
        end
        default: fs <= F_IDLE;
      endcase
    end
  end
endmodule

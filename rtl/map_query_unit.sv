// map_query_unit: Map Query Unit (batch querying).
//
// Coordinates along a trajectory are queried in batches of up to BATCH (16). The unit collects
// the coordinates of a batch (a batch also ends early at a coordinate flagged last), keeps the
// bounding box that encloses them all with the Bounding Box Unit, and starts a single R-tree
// search with that box instead of one search per coordinate. Every Gaussian pointer the search
// returns is fetched once from the global map (through the cache) and then presented to the
// Gaussian Regression Unit once per coordinate of the batch, one coordinate per cycle, which
// is the time-interleaving that lets one regression unit serve the whole batch. When the search
// has finished and the last Gaussian has been fed, the unit asks the regression unit for the
// batch's probabilities, which leave the regression unit directly, and waits for the last one
// before collecting the next batch. Batch querying with 16 coordinates follows the paper; the
// protocol between the units is this design's own.
//
// Timing per batch: n cycles to collect n coordinates, then per retrieved Gaussian one memory
// access plus n cycles of regression input, then about 20 cycles per coordinate for the final
// division. Counters: batches started and Gaussians fetched.
module map_query_unit
  import gleanmer_pkg::*;
#(
  parameter int unsigned BATCH = 16,
  localparam int unsigned SW   = $clog2(BATCH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // coordinates in
  input  logic              q_valid,
  input  vec3_t             q_coord,
  input  logic              q_last,
  output logic              q_ready,
  // R-tree engine
  output logic              rt_start,
  output bbox_t             rt_qbox,
  input  logic              rt_done,
  input  logic              rt_valid,
  input  ptr_t              rt_ptr,
  output logic              rt_ready,
  // Gaussian fetch
  output logic              mreq_valid,
  output ptr_t              mreq_addr,
  input  logic              mreq_ready,
  input  logic              mresp_valid,
  input  logic [LINE_W-1:0] mresp_data,
  // Gaussian Regression Unit
  output logic              c_we,
  output logic [SW-1:0]     c_idx,
  output vec3_t             c_val,
  output logic              g_clear,
  output logic              g_valid,
  output logic [SW-1:0]     g_slot,
  output gaussian_t         g_out,
  input  logic              g_ready,
  output logic              fin_start,
  output logic [SW:0]       fin_n,
  input  logic              g_busy,
  // status
  output logic [31:0]       batches,
  output logic [31:0]       gaussians_fetched
);
  typedef enum logic [2:0] { S_COLLECT, S_START, S_SEARCH, S_FREQ, S_FWAIT, S_FEED, S_WAITOUT } state_t;
  state_t state;

  logic [SW:0]   n;
  logic [SW-1:0] s;
  bbox_t         box, box_u, pbox;
  logic          sdone;
  logic          unused_ov, unused_c;

  bbox_unit u_box (
    .a(box), .b(pbox), .p(q_coord),
    .union_ab(box_u), .overlap_ab(unused_ov), .a_contains_p(unused_c), .point_box(pbox)
  );

  assign q_ready    = (state == S_COLLECT);
  assign c_we       = q_valid && q_ready;
  assign c_idx      = SW'(n);
  assign c_val      = q_coord;
  assign rt_start   = (state == S_START);
  assign rt_qbox    = box;
  assign g_clear    = (state == S_START);
  assign rt_ready   = (state == S_SEARCH);
  assign mreq_valid = (state == S_FREQ);
  assign g_valid    = (state == S_FEED);
  assign g_slot     = s;
  assign fin_start  = (state == S_SEARCH) && sdone && !rt_valid;
  assign fin_n      = n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_COLLECT; n <= '0; s <= '0; box <= '0; sdone <= 1'b0;
      mreq_addr <= '0; g_out <= '0; batches <= '0; gaussians_fetched <= '0;
    end else begin
      if (rt_done) sdone <= 1'b1;
      unique case (state)
        S_COLLECT: if (q_valid) begin
          box <= (n == 0) ? pbox : box_u;
          n   <= n + 1'b1;
          if (q_last || 32'(n) + 1 == BATCH) state <= S_START;
        end
        S_START: begin
          sdone   <= 1'b0;
          batches <= batches + 1;
          state   <= S_SEARCH;
        end
        S_SEARCH: begin
          if (rt_valid) begin
            mreq_addr <= rt_ptr;
            state <= S_FREQ;
          end else if (sdone) begin
            state <= S_WAITOUT;
          end
        end
        S_FREQ: if (mreq_ready) state <= S_FWAIT;
        S_FWAIT: if (mresp_valid) begin
          g_out <= line_to_gaussian(mresp_data);
          gaussians_fetched <= gaussians_fetched + 1;
          s <= '0;
          state <= S_FEED;
        end
        S_FEED: if (g_ready) begin
          s <= s + 1'b1;
          if (32'(s) + 1 == 32'(n)) state <= S_SEARCH;
        end
        S_WAITOUT: if (!g_busy && !fin_start) begin
          n <= '0;
          state <= S_COLLECT;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end
endmodule

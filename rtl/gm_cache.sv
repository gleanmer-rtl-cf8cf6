// gm_cache: 44 KB map cache of the Gaussian Management Engine.
//
// Map construction and query touch one small region of the global map at a time (a few R-tree
// nodes and the Gaussians under them), so a cache between the accelerator and the shared bus
// keeps that region on chip. Organisation: 64-byte lines (one Gaussian record or R-tree node),
// 64 sets x 11 ways = 704 lines = 44 KB, round-robin replacement per set. Reads allocate on a
// miss; writes are written through to the global buffer and update the line only if it is
// present (no allocation on a write miss). inv clears every valid bit, e.g. after the CPU has
// rewritten the map behind the cache.
//
// Interface: one blocking request at a time; req_valid/req_ready with a line address (ptr_t,
// 64-byte units), write flag and data; resp_valid pulses one cycle with the line for a read,
// or as the acknowledgement of a write. A read hit answers two cycles after the request is
// accepted; a miss adds one AXI-4 read of the line; a write completes after the AXI write
// response. The 44 KB size is the paper's; line size, associativity, replacement and write
// policy are this design's own choices.
module gm_cache
  import gleanmer_pkg::*;
#(
  parameter int unsigned WAYS = 11,
  parameter int unsigned SETS = 64,
  parameter logic [AXI_AW-1:0] BASE = '0,
  localparam int unsigned SETW = $clog2(SETS),
  localparam int unsigned TAGW = PTR_W - SETW,
  localparam int unsigned WW   = $clog2(WAYS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inv,
  input  logic              req_valid,
  input  logic              req_we,
  input  ptr_t              req_addr,
  input  logic [LINE_W-1:0] req_wdata,
  output logic              req_ready,
  output logic              resp_valid,
  output logic [LINE_W-1:0] resp_rdata,
  output axi_req_t          axi_o,
  input  axi_rsp_t          axi_i,
  output logic [31:0]       hits,
  output logic [31:0]       misses
);
  typedef enum logic [2:0] { S_IDLE, S_LOOK, S_AR, S_R, S_W, S_B } state_t;
  state_t state;

  logic [LINE_W-1:0] data  [SETS*WAYS];
  logic [TAGW-1:0]   tags  [SETS][WAYS];
  logic              vld   [SETS][WAYS];
  logic [WW-1:0]     rr    [SETS];

  ptr_t              a;
  logic              we;
  logic [LINE_W-1:0] wd;
  logic              aw_done, w_done;
  logic [SETW-1:0]   set;
  logic [TAGW-1:0]   tag;
  logic              hit;
  logic [WW-1:0]     hway;

  assign set = a[SETW-1:0];
  assign tag = a[PTR_W-1:SETW];

  always_comb begin
    hit  = 1'b0;
    hway = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (vld[set][w] && tags[set][w] == tag) begin
        hit  = 1'b1;
        hway = WW'(w);
      end
    end
  end

  assign req_ready = (state == S_IDLE) && !inv;

  always_comb begin
    axi_o          = '0;
    axi_o.ar_valid = (state == S_AR);
    axi_o.ar_addr  = BASE + (AXI_AW'(a) << 6);
    axi_o.r_ready  = (state == S_R);
    axi_o.aw_valid = (state == S_W) && !aw_done;
    axi_o.aw_addr  = BASE + (AXI_AW'(a) << 6);
    axi_o.w_valid  = (state == S_W) && !w_done;
    axi_o.w_data   = wd;
    axi_o.w_strb   = '1;
    axi_o.b_ready  = (state == S_B);
  end

  always_ff @(posedge clk) begin
    if (state == S_LOOK && we && hit) data[32'(set) * WAYS + 32'(hway)] <= wd;
    if (state == S_R && axi_i.r_valid) data[32'(set) * WAYS + 32'(rr[set])] <= axi_i.r_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; a <= '0; we <= 1'b0; wd <= '0; aw_done <= 1'b0; w_done <= 1'b0;
      resp_valid <= 1'b0; resp_rdata <= '0; hits <= '0; misses <= '0;
      for (int s = 0; s < SETS; s++) begin
        rr[s] <= '0;
        for (int w = 0; w < WAYS; w++) begin vld[s][w] <= 1'b0; tags[s][w] <= '0; end
      end
    end else begin
      resp_valid <= 1'b0;
      if (inv) begin
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++) vld[s][w] <= 1'b0;
      end
      unique case (state)
        S_IDLE: if (req_valid && !inv) begin
          a <= req_addr; we <= req_we; wd <= req_wdata;
          state <= S_LOOK;
        end
        S_LOOK: begin
          if (we) begin
            aw_done <= 1'b0; w_done <= 1'b0;
            state <= S_W;
          end else if (hit) begin
            hits       <= hits + 1;
            resp_valid <= 1'b1;
            resp_rdata <= data[32'(set) * WAYS + 32'(hway)];
            state      <= S_IDLE;
          end else begin
            misses <= misses + 1;
            state  <= S_AR;
          end
        end
        S_AR: if (axi_i.ar_ready) state <= S_R;
        S_R: if (axi_i.r_valid) begin
          tags[set][rr[set]] <= tag;
          vld[set][rr[set]]  <= 1'b1;
          rr[set]    <= (32'(rr[set]) == WAYS - 1) ? '0 : rr[set] + 1'b1;
          resp_valid <= 1'b1;
          resp_rdata <= axi_i.r_data;
          state      <= S_IDLE;
        end
        S_W: begin
          if (axi_i.aw_ready) aw_done <= 1'b1;
          if (axi_i.w_ready)  w_done  <= 1'b1;
          if ((aw_done || axi_i.aw_ready) && (w_done || axi_i.w_ready)) state <= S_B;
        end
        S_B: if (axi_i.b_valid) begin
          resp_valid <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule

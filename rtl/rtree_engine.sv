// rtree_engine: R-Tree Engine of the Gaussian Management Engine (search).
//
// The global map indexes its Gaussians with an R-tree of axis-aligned bounding boxes. Each node
// is one 512-bit line of the global map holding RT_FANOUT (4) entries; an entry carries a box,
// a leaf flag and a line pointer (to a child node, or for a leaf entry to a Gaussian record;
// pointer 0 marks an empty entry). A search returns every leaf entry whose box overlaps the
// query box. It is a depth-first walk with an explicit pointer stack: pop a node, read it
// through the memory port (the map cache), test its entries one per cycle with the Bounding
// Box Unit, push overlapping child nodes and output overlapping leaf pointers. Because batch
// querying searches once with the box enclosing all coordinates of a batch, nodes_visited (the
// number of node reads of the last search) is the traversal length the batch saves.
//
// Interface: start/qbox/root begin a search while idle; mreq/mresp is a blocking one-request
// port (valid/ready request, response valid one or more cycles later); out_valid/out_ptr/
// out_ready stream the hits; done pulses for one cycle at the end. A push into a full stack is
// dropped and counted in stack_overflow. The paper states that the engine supports insertion,
// removal and search in logarithmic time; only search is built here. Node layout, fanout and
// stack depth are this design's own choices.
module rtree_engine
  import gleanmer_pkg::*;
#(
  parameter int unsigned STACK_DEPTH = 32,
  localparam int unsigned SPW        = $clog2(STACK_DEPTH + 1),
  localparam int unsigned IXW        = (STACK_DEPTH > 1) ? $clog2(STACK_DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  bbox_t             qbox,
  input  ptr_t              root,
  output logic              busy,
  output logic              done,
  output logic              mreq_valid,
  output ptr_t              mreq_addr,
  input  logic              mreq_ready,
  input  logic              mresp_valid,
  input  logic [LINE_W-1:0] mresp_data,
  output logic              out_valid,
  output ptr_t              out_ptr,
  input  logic              out_ready,
  output logic [15:0]       nodes_visited,
  output logic [15:0]       stack_overflow
);
  typedef enum logic [2:0] { S_IDLE, S_POP, S_REQ, S_WAIT, S_SCAN, S_OUT } state_t;
  state_t state;

  ptr_t        stack [STACK_DEPTH];
  logic [SPW-1:0] sp;
  bbox_t       q;
  rt_node_t    node;
  logic [1:0]  i;
  rt_entry_t   ent;
  logic        hit;
  bbox_t       unused_u, unused_pb;
  logic        unused_c;

  assign ent = node[i];
  bbox_unit u_box (
    .a(ent.box), .b(q), .p(q.lo),
    .union_ab(unused_u), .overlap_ab(hit), .a_contains_p(unused_c), .point_box(unused_pb)
  );

  assign busy       = (state != S_IDLE);
  assign mreq_valid = (state == S_REQ);
  assign out_valid  = (state == S_OUT);
  assign out_ptr    = ent.ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sp <= '0; q <= '0; node <= '0; i <= '0; mreq_addr <= '0;
      done <= 1'b0; nodes_visited <= '0; stack_overflow <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          q <= qbox;
          stack[0] <= root;
          sp <= SPW'(1);
          nodes_visited <= '0;
          state <= S_POP;
        end
        S_POP: begin
          if (sp == 0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            mreq_addr <= stack[IXW'(sp - 1'b1)];
            sp <= sp - 1'b1;
            state <= S_REQ;
          end
        end
        S_REQ: if (mreq_ready) state <= S_WAIT;
        S_WAIT: if (mresp_valid) begin
          node <= rt_node_t'(mresp_data);
          nodes_visited <= nodes_visited + 1'b1;
          i <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (ent.ptr != 0 && hit && ent.leaf) begin
            state <= S_OUT;
          end else begin
            if (ent.ptr != 0 && hit) begin
              if (32'(sp) < STACK_DEPTH) begin
                stack[IXW'(sp)] <= ent.ptr;
                sp <= sp + 1'b1;
              end else begin
                stack_overflow <= stack_overflow + 1'b1;
              end
            end
            i <= i + 1'b1;
            if (i == 2'(RT_FANOUT - 1)) state <= S_POP;
          end
        end
        S_OUT: if (out_ready) begin
          i <= i + 1'b1;
          state <= (i == 2'(RT_FANOUT - 1)) ? S_POP : S_SCAN;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mreq_valid && !mreq_ready |=> mreq_valid && $stable(mreq_addr));
endmodule

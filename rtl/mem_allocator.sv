// mem_allocator: Memory Allocator of the Gaussian Management Engine.
//
// Hands out and takes back 64-byte lines of the global buffer for Gaussian records and R-tree
// nodes as the map grows and shrinks. Lines FIRST..LAST form the map region (line 0 stays free
// so that pointer 0 can mean "none"). Allocation prefers a recycled line from a stack of freed
// lines and otherwise takes the next never-used line; when both are exhausted alloc_ok is low.
// A freed line is pushed on the stack; if the stack is full the line is not recycled and is
// counted in leaked. When a free and an allocation happen in the same cycle, the freed line is
// handed straight to the allocation.
//
// Interface: alloc_ptr/alloc_ok are combinational; the allocation takes place at the clock edge
// with alloc_req && alloc_ok. free_req/free_ptr return a line at the clock edge. in_use counts
// lines handed out. The paper names this unit only; the policy is this design's own.
module mem_allocator
  import gleanmer_pkg::*;
#(
  parameter int unsigned FIRST      = 1,
  parameter int unsigned LAST       = (1 << PTR_W) - 1,
  parameter int unsigned FREE_DEPTH = 1024,
  localparam int unsigned SPW       = $clog2(FREE_DEPTH + 1),
  localparam int unsigned IXW       = (FREE_DEPTH > 1) ? $clog2(FREE_DEPTH) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        alloc_req,
  output ptr_t        alloc_ptr,
  output logic        alloc_ok,
  input  logic        free_req,
  input  ptr_t        free_ptr,
  output logic [PTR_W:0] in_use,
  output logic [31:0] leaked
);
  ptr_t           stack [FREE_DEPTH];
  logic [SPW-1:0] sp;
  logic [PTR_W:0] fresh;      // next line never handed out
  logic           from_stack, bypass;

  always_comb begin
    bypass     = free_req;
    from_stack = !bypass && (sp != 0);
    if (bypass)          alloc_ptr = free_ptr;
    else if (from_stack) alloc_ptr = stack[IXW'(sp - 1'b1)];
    else                 alloc_ptr = PTR_W'(fresh);
    alloc_ok = bypass || from_stack || (32'(fresh) <= LAST);
  end

  always_ff @(posedge clk) begin
    if (free_req && !alloc_req && 32'(sp) < FREE_DEPTH) stack[IXW'(sp)] <= free_ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp <= '0; fresh <= (PTR_W+1)'(FIRST); in_use <= '0; leaked <= '0;
    end else begin
      if (alloc_req && alloc_ok) begin
        if (from_stack) sp <= sp - 1'b1;
        else if (!bypass) fresh <= fresh + 1'b1;
        if (!bypass) in_use <= in_use + 1'b1;
      end else if (free_req) begin
        if (32'(sp) < FREE_DEPTH) sp <= sp + 1'b1;
        else leaked <= leaked + 1;
        in_use <= in_use - 1'b1;
      end
    end
  end
endmodule

// mem_arb: fixed-priority arbiter that lets several units share the map cache's single
// blocking request port. Requester 0 has the highest priority. While the port is idle the
// highest-priority valid request is forwarded; once the cache accepts it, that requester owns
// the port until the cache's response (resp_valid) is routed back to it. Helper of the
// accelerator top; not a block of its own in the architecture.
module mem_arb
  import gleanmer_pkg::*;
#(
  parameter int unsigned N = 3,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              r_valid [N],
  input  logic              r_we    [N],
  input  ptr_t              r_addr  [N],
  input  logic [LINE_W-1:0] r_wdata [N],
  output logic              r_ready [N],
  output logic              r_resp  [N],
  output logic              c_valid,
  output logic              c_we,
  output ptr_t              c_addr,
  output logic [LINE_W-1:0] c_wdata,
  input  logic              c_ready,
  input  logic              c_resp
);
  logic          busy;
  logic [IW-1:0] owner, pick;
  logic          any;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (r_valid[i]) begin
        any  = 1'b1;
        pick = IW'(i);
      end
    end
    c_valid = !busy && any;
    c_we    = r_we[pick];
    c_addr  = r_addr[pick];
    c_wdata = r_wdata[pick];
    for (int i = 0; i < N; i++) begin
      r_ready[i] = !busy && any && (pick == IW'(i)) && c_ready;
      r_resp[i]  = busy && (owner == IW'(i)) && c_resp;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; owner <= '0;
    end else if (!busy) begin
      if (c_valid && c_ready) begin
        busy  <= 1'b1;
        owner <= pick;
      end
    end else if (c_resp) begin
      busy <= 1'b0;
    end
  end
endmodule

// global_buffer: 512 KB global buffer holding the shared global map.
//
// The map (Gaussian records and R-tree nodes, 64 bytes each) lives here so that the CPU and
// the accelerator share one copy over the AXI-4 bus. The buffer is an AXI-4 slave for
// single-beat 512-bit transfers: a read returns the addressed 64-byte line one cycle after the
// address handshake; a write needs both the address and the data beat, stores the bytes enabled
// by w_strb, and answers on the B channel the next cycle. Addresses are byte addresses; the low
// six bits are ignored. The size is the paper's; the port behaviour is this design's own.
module global_buffer
  import gleanmer_pkg::*;
#(
  parameter int unsigned BYTES = 512 * 1024,
  localparam int unsigned LINES = BYTES / (LINE_W / 8),
  localparam int unsigned LW    = $clog2(LINES)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t s_i,
  output axi_rsp_t s_o
);
  logic [LINE_W-1:0] mem [LINES];
  logic [LW-1:0]     widx;
  logic              aw_got, w_got;
  logic [LINE_W-1:0] wdata;
  logic [LINE_W/8-1:0] wstrb;
  logic              r_valid_q, b_valid_q;
  logic [LINE_W-1:0] r_data_q;

  always_comb begin
    s_o          = '0;
    s_o.ar_ready = !r_valid_q;
    s_o.aw_ready = !aw_got && !b_valid_q;
    s_o.w_ready  = !w_got && !b_valid_q;
    s_o.r_valid  = r_valid_q;
    s_o.r_data   = r_data_q;
    s_o.r_resp   = AXI_OKAY;
    s_o.b_valid  = b_valid_q;
    s_o.b_resp   = AXI_OKAY;
  end

  always_ff @(posedge clk) begin
    if (aw_got && w_got && !b_valid_q) begin
      for (int b = 0; b < LINE_W / 8; b++)
        if (wstrb[b]) mem[widx][b*8 +: 8] <= wdata[b*8 +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid_q <= 1'b0; r_data_q <= '0; b_valid_q <= 1'b0;
      aw_got <= 1'b0; w_got <= 1'b0; widx <= '0; wdata <= '0; wstrb <= '0;
    end else begin
      if (s_i.ar_valid && s_o.ar_ready) begin
        r_valid_q <= 1'b1;
        r_data_q  <= mem[s_i.ar_addr[6 +: LW]];
      end else if (r_valid_q && s_i.r_ready) begin
        r_valid_q <= 1'b0;
      end
      if (s_i.aw_valid && s_o.aw_ready) begin
        aw_got <= 1'b1;
        widx   <= s_i.aw_addr[6 +: LW];
      end
      if (s_i.w_valid && s_o.w_ready) begin
        w_got <= 1'b1;
        wdata <= s_i.w_data;
        wstrb <= s_i.w_strb;
      end
      if (aw_got && w_got && !b_valid_q) begin
        b_valid_q <= 1'b1;
      end
      if (b_valid_q && s_i.b_ready) begin
        b_valid_q <= 1'b0;
        aw_got <= 1'b0;
        w_got  <= 1'b0;
      end
    end
  end
endmodule

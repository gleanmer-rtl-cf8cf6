// axi_bus: shared AXI-4 bus between the CPU, the accelerator and the global buffer.
//
// NM managers (masters) share the bus to NS subordinates (slaves); one transaction is on the
// bus at a time, as on a shared bus. In the idle state a round-robin arbiter picks the next
// manager that presents a read address or a write address; the address selects the
// subordinate whose window (addr & MASK) == BASE contains it. A read passes AR then R; a write
// passes AW and W (in either order) then B; the bus returns to idle after the last handshake.
// An address in no window is accepted and answered by the bus itself with DECERR (read data
// zero). Only
// single-beat transfers (AxLEN = 0) of the full 512-bit data width are carried, with one ID.
// The paper specifies a shared AXI-4 bus; the subset, arbitration and address map are this
// design's own choices. Assertions check that a manager holds a valid address until it is
// accepted.
module axi_bus
  import gleanmer_pkg::*;
#(
  parameter int unsigned NM = 2,
  parameter int unsigned NS = 1,
  parameter logic [NS-1:0][AXI_AW-1:0] SLV_BASE = '0,
  parameter logic [NS-1:0][AXI_AW-1:0] SLV_MASK = {NS{32'hfff8_0000}},
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1,
  localparam int unsigned SW = $clog2(NS + 1)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t m_req [NM],
  output axi_rsp_t m_rsp [NM],
  output axi_req_t s_req [NS],
  input  axi_rsp_t s_rsp [NS]
);
  typedef enum logic [3:0] { S_IDLE, S_AR, S_R, S_W, S_B, S_ERR_AR, S_ERR_R, S_ERR_W, S_ERR_B } state_t;
  state_t state;

  logic [MW-1:0] gnt, last;
  logic [SW-1:0] sel;           // NS means "no subordinate"
  logic          aw_done, w_done;

  // round-robin pick among requesting managers
  logic          pick_any;
  logic [MW-1:0] pick;
  always_comb begin
    pick_any = 1'b0;
    pick     = '0;
    for (int k = 1; k <= NM; k++) begin
      int m;
      m = (32'(last) + k) % NM;
      if (!pick_any && (m_req[m].ar_valid || m_req[m].aw_valid)) begin
        pick_any = 1'b1;
        pick     = MW'(m);
      end
    end
  end

  function automatic logic [SW-1:0] decode(logic [AXI_AW-1:0] addr);
    decode = SW'(NS);
    for (int s = NS - 1; s >= 0; s--)
      if ((addr & SLV_MASK[s]) == SLV_BASE[s]) decode = SW'(s);
  endfunction

  always_comb begin
    for (int m = 0; m < NM; m++) m_rsp[m] = '0;
    for (int s = 0; s < NS; s++) s_req[s] = '0;
    unique case (state)
      S_AR, S_R, S_W, S_B: begin
        for (int s = 0; s < NS; s++) begin
          if (SW'(s) == sel) begin
            s_req[s].ar_valid = (state == S_AR) && m_req[gnt].ar_valid;
            s_req[s].ar_addr  = m_req[gnt].ar_addr;
            s_req[s].r_ready  = (state == S_R) && m_req[gnt].r_ready;
            s_req[s].aw_valid = (state == S_W) && !aw_done && m_req[gnt].aw_valid;
            s_req[s].aw_addr  = m_req[gnt].aw_addr;
            s_req[s].w_valid  = (state == S_W) && !w_done && m_req[gnt].w_valid;
            s_req[s].w_data   = m_req[gnt].w_data;
            s_req[s].w_strb   = m_req[gnt].w_strb;
            s_req[s].b_ready  = (state == S_B) && m_req[gnt].b_ready;
            m_rsp[gnt].ar_ready = (state == S_AR) && s_rsp[s].ar_ready;
            m_rsp[gnt].r_valid  = (state == S_R) && s_rsp[s].r_valid;
            m_rsp[gnt].r_data   = s_rsp[s].r_data;
            m_rsp[gnt].r_resp   = s_rsp[s].r_resp;
            m_rsp[gnt].aw_ready = (state == S_W) && !aw_done && s_rsp[s].aw_ready;
            m_rsp[gnt].w_ready  = (state == S_W) && !w_done && s_rsp[s].w_ready;
            m_rsp[gnt].b_valid  = (state == S_B) && s_rsp[s].b_valid;
            m_rsp[gnt].b_resp   = s_rsp[s].b_resp;
          end
        end
      end
      S_ERR_AR: m_rsp[gnt].ar_ready = 1'b1;
      S_ERR_W: begin
        m_rsp[gnt].aw_ready = !aw_done;
        m_rsp[gnt].w_ready  = !w_done;
      end
      S_ERR_R: begin
        m_rsp[gnt].r_valid = 1'b1;
        m_rsp[gnt].r_resp  = AXI_DECERR;
      end
      S_ERR_B: begin
        m_rsp[gnt].b_valid = 1'b1;
        m_rsp[gnt].b_resp  = AXI_DECERR;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; gnt <= '0; last <= MW'(NM - 1); sel <= '0; aw_done <= 1'b0; w_done <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (pick_any) begin
          gnt  <= pick;
          last <= pick;
          aw_done <= 1'b0; w_done <= 1'b0;
          if (m_req[pick].ar_valid) begin
            sel   <= decode(m_req[pick].ar_addr);
            state <= (decode(m_req[pick].ar_addr) == SW'(NS)) ? S_ERR_AR : S_AR;
          end else begin
            sel   <= decode(m_req[pick].aw_addr);
            state <= (decode(m_req[pick].aw_addr) == SW'(NS)) ? S_ERR_W : S_W;
          end
        end
        S_AR: if (m_req[gnt].ar_valid && m_rsp[gnt].ar_ready) state <= S_R;
        S_R:  if (m_rsp[gnt].r_valid && m_req[gnt].r_ready) state <= S_IDLE;
        S_W: begin
          if (m_req[gnt].aw_valid && m_rsp[gnt].aw_ready) aw_done <= 1'b1;
          if (m_req[gnt].w_valid && m_rsp[gnt].w_ready)   w_done  <= 1'b1;
          if ((aw_done || (m_req[gnt].aw_valid && m_rsp[gnt].aw_ready)) &&
              (w_done  || (m_req[gnt].w_valid  && m_rsp[gnt].w_ready))) state <= S_B;
        end
        S_B:     if (m_rsp[gnt].b_valid && m_req[gnt].b_ready) state <= S_IDLE;
        S_ERR_AR: if (m_req[gnt].ar_valid) state <= S_ERR_R;
        S_ERR_W: begin
          if (m_req[gnt].aw_valid) aw_done <= 1'b1;
          if (m_req[gnt].w_valid)  w_done  <= 1'b1;
          if ((aw_done || m_req[gnt].aw_valid) && (w_done || m_req[gnt].w_valid)) state <= S_ERR_B;
        end
        S_ERR_R: if (m_req[gnt].r_ready) state <= S_IDLE;
        S_ERR_B: if (m_req[gnt].b_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_chk
    a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[m].ar_valid && !m_rsp[m].ar_ready |=> m_req[m].ar_valid);
    a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[m].aw_valid && !m_rsp[m].aw_ready |=> m_req[m].aw_valid);
  end
endmodule

// gm_sram: on-chip SRAM of the accelerator (line segment buffer, sample memory, free bases
// memory, depth-row buffer), one write port and one read port.
//
// A write with we=1 stores wdata at waddr at the clock edge. A read presents raddr with re=1;
// rdata holds the word one cycle later and keeps it until the next read (registered output, as
// a compiled SRAM macro would). A read and a write of the same address in one cycle return the
// old word. The capacity (words x width) is set per instance so that it matches the kilobytes
// printed for that memory in the architecture figure; the port arrangement is this design's
// own choice. Contents are not reset.
module gm_sram #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end
endmodule

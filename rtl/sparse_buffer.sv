// sparse_buffer: on-chip buffer for sparse tiles in CSR form (256 B).
//
// Organised as WORDS 32-bit words. The DMA writes one 128-bit bus beat per
// cycle as four consecutive words starting at a word address whose two low
// bits are ignored. The CSR decoder streams single words through a
// synchronous read port (data one cycle after `re`). Several tiles can live at
// different base addresses, so software can load one tile while the decoder
// reads another (multi-buffering). Capacity follows the design's 256 B; the
// 64 x 32-bit organisation and the port widths are this design's choice.
module sparse_buffer
  import fv_pkg::*;
#(
  parameter int unsigned WORDS = SB_WORDS,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [127:0]    wdata,
  input  logic            re,
  input  logic [AW-1:0]   raddr,
  output logic [31:0]     rdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int i = 0; i < 4; i++) mem[{waddr[AW-1:2], 2'(i)}] <= wdata[i*32 +: 32];
    end
    if (re) rdata <= mem[raddr];
  end

endmodule

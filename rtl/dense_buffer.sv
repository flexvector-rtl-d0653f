// dense_buffer: on-chip buffer for dense rows (2 KB = 128 rows of 128 bits).
//
// Software divides the rows into the regions of the design by the addresses
// it puts in instructions: the rows-to-compute region (M_BUF sub-buffers of
// one TILE-row dense tile each, so DMA can fill one while another is moved to
// the VRF), the Result Matrix region and the Temp Matrix region used for
// partial sums. With the defaults 6 x 16 rows + 16 + 16 fill exactly 128
// rows. Port A serves the DMA (LD_D writes, ST_D reads); port B serves the
// vector side (VRF moves read, CMP results write). Both ports read
// synchronously (data one cycle after the enable). If both ports write the
// same row in one cycle, port B wins. The two-port organisation is this
// design's choice.
module dense_buffer
  import fv_pkg::*;
#(
  parameter int unsigned ROWS = DB_ROWS,
  parameter int unsigned W    = VLEN,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [W-1:0]  a_wdata,
  output logic [W-1:0]  a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [W-1:0]  b_wdata,
  output logic [W-1:0]  b_rdata
);

  logic [W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (a_en && a_we && !(b_en && b_we && b_addr == a_addr)) mem[a_addr] <= a_wdata;
    if (b_en && b_we) mem[b_addr] <= b_wdata;
    if (a_en && !a_we) a_rdata <= mem[a_addr];
    if (b_en && !b_we) b_rdata <= mem[b_addr];
  end

endmodule

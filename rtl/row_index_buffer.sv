// row_index_buffer: per-sparse-row bitmaps produced by CAL_IDX.
//
// Entry r holds a W-bit one-hot-per-column bitmap: bit c is set when sparse
// row r of the current tile has a nonzero in column c and dense row c is not
// held in the VRF fixed region, i.e. dense row c must be moved into the
// dynamic region by MV_Dyn before row r is computed. Written by the CSR
// decoder one entry per cycle; read combinationally by the data mover. The
// depth (two sub-rows per tile row, enough for vertex-cut tiles) is this
// design's choice.
module row_index_buffer
  import fv_pkg::*;
#(
  parameter int unsigned DEPTH = RIB_DEPTH,
  parameter int unsigned W     = TILE,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule

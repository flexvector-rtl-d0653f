// vector_lane: one 32-bit lane of the MAC vector unit.
//
// Each lane receives the scalar broadcast by the CSR decoder and its slice of
// the current VRF row (already split by the unpack network) and accumulates
// scalar x element every cycle that `en` is high. In INT8 mode the lane works
// as four independent 8x8 multiply-accumulators, in INT32 mode as one 32x32
// multiply-accumulator on element 0 (the other accumulators keep zero). The
// multiplicand multiplexer follows the MAC vector unit of the design: it picks
// either the CSR scalar or the constant 1; the constant is used to add a
// partial-sum row into the accumulators. Accumulators are 32 bits per element
// and wrap on overflow (the accumulator width is this design's choice).
//
// Timing: `clr` (synchronous, has priority) zeroes all accumulators; `en`
// adds the product at the next rising edge. `acc` is the registered sum.
module vector_lane
  import fv_pkg::*;
#(
  parameter int unsigned SW = SUBW
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              en,
  input  prec_e             prec,
  input  logic              sel_one,
  input  logic [31:0]       scalar,
  input  logic [SW-1:0][31:0] opnd,
  output logic [SW-1:0][31:0] acc
);

  logic [31:0]       mult32;  // multiplicand, INT32 mode
  logic [7:0]        mult8;   // multiplicand, INT8 mode
  logic [SW-1:0][31:0] prod;

  assign mult32 = sel_one ? 32'd1 : scalar;
  assign mult8  = sel_one ? 8'd1  : scalar[7:0];

  always_comb begin
    for (int j = 0; j < SW; j++) begin
      logic signed [15:0] p8;
      p8 = $signed(mult8) * $signed(opnd[j][7:0]);
      if (prec == PREC_INT32) prod[j] = (j == 0) ? mult32 * opnd[0] : 32'd0;
      else                    prod[j] = {{16{p8[15]}}, p8};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (clr) acc <= '0;
    else if (en) begin
      for (int j = 0; j < SW; j++) acc[j] <= acc[j] + prod[j];
    end
  end

endmodule

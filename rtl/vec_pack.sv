// vec_pack: the packed (write) network between the lanes and the result row.
//
// Once the CSR decoder flags the end of an output row, the accumulators of
// all lanes are reassembled into one VLEN-wide word: in INT8 mode the low
// byte of each of the NL*SW accumulators lands at element position
// l*SW+j; in INT32 mode accumulator 0 of lane l fills word l. Results are
// truncated to the element width (wrap-around); the design does not describe
// requantisation, so none is done. Purely combinational.
module vec_pack
  import fv_pkg::*;
#(
  parameter int unsigned NL = NLANES,
  parameter int unsigned SW = SUBW
) (
  input  prec_e                      prec,
  input  logic [NL-1:0][SW-1:0][31:0] acc,
  output logic [NL*SW*8-1:0]         row
);

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      if (prec == PREC_INT32) row[l*32 +: 32] = acc[l][0];
      else begin
        for (int j = 0; j < SW; j++) row[(l*SW+j)*8 +: 8] = acc[l][j][7:0];
      end
    end
  end

endmodule

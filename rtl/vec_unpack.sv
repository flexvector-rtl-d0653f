// vec_unpack: the unpacked (read) network between the VRF and the lanes.
//
// A VRF row of VLEN bits is divided by precision: in INT8 mode into
// VLEN/8 signed bytes, element e going to lane e/SUBW, sub-element e%SUBW,
// sign-extended to 32 bits; in INT32 mode into VLEN/32 words, word l going to
// sub-element 0 of lane l, the other sub-elements receiving zero. The
// division into four 32-bit or sixteen 8-bit elements follows the design;
// sign extension is this implementation's choice. Purely combinational.
module vec_unpack
  import fv_pkg::*;
#(
  parameter int unsigned NL = NLANES,
  parameter int unsigned SW = SUBW
) (
  input  prec_e                      prec,
  input  logic [NL*SW*8-1:0]         row,
  output logic [NL-1:0][SW-1:0][31:0] opnd
);

  always_comb begin
    for (int l = 0; l < NL; l++) begin
      for (int j = 0; j < SW; j++) begin
        if (prec == PREC_INT8) opnd[l][j] = {{24{row[(l*SW+j)*8+7]}}, row[(l*SW+j)*8 +: 8]};
        else                   opnd[l][j] = (j == 0) ? row[l*32 +: 32] : 32'd0;
      end
    end
  end

endmodule

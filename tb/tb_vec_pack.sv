// tb_vec_pack: checks the pack network: INT8 takes the low byte of each of
// the sixteen accumulators in element order, INT32 the first accumulator of
// each lane.
// Combinational, no timing. Precisions follow the published design
// (INT8/INT32); the truncation to element width is this design's own.
module tb_vec_pack;
  import fv_pkg::*;

  prec_e prec;
  logic [3:0][3:0][31:0] acc;
  logic [127:0] row;
  int checks = 0, failures = 0;

  vec_pack dut (.prec, .acc, .row);

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int l = 0; l < 4; l++) for (int j = 0; j < 4; j++) acc[l][j] = $urandom;
      prec = prec_e'(t % 2);
      #1;
      for (int e = 0; e < 16; e++) begin
        logic [7:0] expb;
        expb = (prec == PREC_INT8) ? acc[e/4][e%4][7:0] : acc[e/4][0][8*(e%4) +: 8];
        checks++;
        if (row[8*e +: 8] !== expb) begin
          failures++;
          if (failures < 10) $display("FAIL e=%0d got %h exp %h", e, row[8*e +: 8], expb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

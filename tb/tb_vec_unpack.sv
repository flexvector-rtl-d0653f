// tb_vec_unpack: checks the unpack network on random rows in both
// precisions against per-element extraction written out independently.
// Combinational, no timing. Precisions follow the published design
// (INT8/INT32); sign extension and element order are this design's own.
module tb_vec_unpack;
  import fv_pkg::*;

  prec_e prec;
  logic [127:0] row;
  logic [3:0][3:0][31:0] opnd;
  int checks = 0, failures = 0;

  vec_unpack dut (.prec, .row, .opnd);

  initial begin
    for (int t = 0; t < 500; t++) begin
      row  = {$urandom, $urandom, $urandom, $urandom};
      prec = prec_e'(t % 2);
      #1;
      for (int e = 0; e < 16; e++) begin
        automatic int l = e / 4;
        automatic int j = e % 4;
        automatic int exp8 = int'($signed(row[8*e +: 8]));
        logic [31:0] expv;
        if (prec == PREC_INT8) expv = 32'(exp8);
        else expv = (j == 0) ? row[32*l +: 32] : 32'd0;
        checks++;
        if (opnd[l][j] !== expv) begin
          failures++;
          if (failures < 10) $display("FAIL e=%0d got %h exp %h", e, opnd[l][j], expv);
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

// tb_vector_lane: self-checking test of one MAC lane.
// Drives random scalars and operands in INT8 and INT32 mode, with clears,
// idle cycles and the multiply-by-one partial-sum path, and compares the
// four accumulators every cycle with a model kept in the testbench.
// Timing: one MAC per cycle, accumulators update at the clock edge. The lane
// structure follows the published MAC unit; 32-bit accumulators are this
// design's own.
module tb_vector_lane;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 1'b0;
  logic clr, en, sel_one;
  prec_e prec;
  logic [31:0] scalar;
  logic [3:0][31:0] opnd, acc;
  logic [31:0] model [4];
  int checks = 0, failures = 0;

  vector_lane dut (.clk, .rst_n, .clr, .en, .prec, .sel_one, .scalar, .opnd, .acc);

  initial begin
    clr = 0; en = 0; sel_one = 0; prec = PREC_INT8; scalar = 0; opnd = '0;
    for (int j = 0; j < 4; j++) model[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (t % 200 == 0) prec = prec_e'((t / 200) % 2);
      clr     = ($urandom % 37 == 0) || (t % 200 == 0);
      en      = ($urandom % 4) != 0;
      sel_one = ($urandom % 6) == 0;
      scalar  = $urandom;
      for (int j = 0; j < 4; j++) begin
        automatic logic [7:0] b = 8'($urandom);
        opnd[j] = (prec == PREC_INT8) ? {{24{b[7]}}, b} : ((j == 0) ? $urandom : 32'd0);
      end
      // model
      if (clr) for (int j = 0; j < 4; j++) model[j] = 0;
      else if (en) begin
        for (int j = 0; j < 4; j++) begin
          automatic int m8  = sel_one ? 1 : int'($signed(scalar[7:0]));
          automatic int m32 = sel_one ? 1 : int'(scalar);
          if (prec == PREC_INT8) model[j] += 32'(m8 * int'($signed(opnd[j][7:0])));
          else if (j == 0) model[j] += 32'(m32 * int'(opnd[0]));
        end
      end
      @(posedge clk);
      #1;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (acc[j] !== model[j]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d j=%0d acc=%h exp=%h", t, j, acc[j], model[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

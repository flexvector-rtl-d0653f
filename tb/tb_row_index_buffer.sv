// tb_row_index_buffer: writes bitmaps to random entries and checks the
// combinational read port against a shadow copy, including reading an entry
// in the cycle after it was written.
// Timing: synchronous write, combinational read. Its content (one bitmap per
// sparse row) follows the published design, its depth is this design's own.
module tb_row_index_buffer;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [4:0] waddr = '0, raddr = '0;
  logic [15:0] wdata = '0, rdata;
  logic [15:0] shadow [32];
  int checks = 0, failures = 0;

  row_index_buffer dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); we = 1; waddr = 5'(r); wdata = 16'($urandom); shadow[r] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 5'($urandom); wdata = 16'($urandom);
      raddr = ($urandom % 3 == 0) ? waddr : 5'($urandom);
      #1;
      checks++;
      if (rdata !== shadow[raddr]) begin failures++; $display("FAIL entry %0d", raddr); end
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
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

// tb_sparse_buffer: writes random 128-bit beats at random aligned addresses,
// reads single words back (one-cycle read latency) and compares with a
// shadow copy; includes a read of a word written in the same cycle's
// previous beat.
// Timing: one-cycle read latency. Size follows the published 256 B; the 64 x
// 32-bit organisation is this design's own.
module tb_sparse_buffer;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic we = 0, re = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [127:0] wdata = '0;
  logic [31:0] rdata;
  logic [31:0] shadow [64];
  int checks = 0, failures = 0;

  sparse_buffer dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    // fill everything once
    for (int b = 0; b < 16; b++) begin
      @(negedge clk);
      we = 1; waddr = 6'(4*b + ($urandom % 4)); wdata = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < 4; i++) shadow[4*b + i] = wdata[32*i +: 32];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      automatic int   ra = $urandom % 64;
      automatic logic [31:0] expv = shadow[ra];
      @(negedge clk);
      we = ($urandom % 3) == 0;
      waddr = 6'($urandom);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      re = 1; raddr = 6'(ra);
      @(posedge clk);
      if (we) for (int i = 0; i < 4; i++) shadow[{waddr[5:2], 2'(i)}] = wdata[32*i +: 32];
      #1;
      checks++;
      if (rdata !== expv) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", ra, rdata, expv);
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

// tb_dense_buffer: random traffic on both ports of the Dense Buffer (reads
// with one-cycle latency, writes, and same-row write collisions where port B
// must win), checked against a shadow memory.
// Timing: one-cycle read latency on both ports. Size follows the published 2
// KB; the port arrangement and collision rule are this design's own.
module tb_dense_buffer;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [6:0] a_addr = '0, b_addr = '0;
  logic [127:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  logic [127:0] shadow [128];
  int checks = 0, failures = 0, collisions = 0;

  dense_buffer dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  initial begin
    for (int r = 0; r < 128; r++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 7'(r); a_wdata = {$urandom, $urandom, $urandom, $urandom};
      shadow[r] = a_wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      automatic logic [127:0] ea, eb;
      @(negedge clk);
      a_en = 1; b_en = 1;
      a_we = ($urandom % 2); b_we = ($urandom % 2);
      a_addr = 7'($urandom); b_addr = ($urandom % 4 == 0) ? a_addr : 7'($urandom);
      a_wdata = {$urandom, $urandom, $urandom, $urandom};
      b_wdata = {$urandom, $urandom, $urandom, $urandom};
      ea = shadow[a_addr]; eb = shadow[b_addr];
      @(posedge clk);
      if (a_we && !(b_we && b_addr == a_addr)) shadow[a_addr] = a_wdata;
      if (b_we) shadow[b_addr] = b_wdata;
      if (a_we && b_we && a_addr == b_addr) collisions++;
      #1;
      if (!a_we) begin checks++; if (a_rdata !== ea) begin failures++; $display("FAIL A row %0d", a_addr); end end
      if (!b_we) begin checks++; if (b_rdata !== eb) begin failures++; $display("FAIL B row %0d", b_addr); end end
    end
    // read everything back through port B
    a_en = 0;
    for (int r = 0; r < 128; r++) begin
      @(negedge clk); b_en = 1; b_we = 0; b_addr = 7'(r);
      @(posedge clk); #1;
      checks++;
      if (b_rdata !== shadow[r]) begin failures++; $display("FAIL final row %0d", r); end
    end
    checks++;
    if (collisions == 0) failures++;
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

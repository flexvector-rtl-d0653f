// tb_instr_buffer: stores random programs (odd and even lengths, longer than
// the buffer) in a DRAM model with random latency and ready, starts the
// prefetcher and pops instructions at random moments. Checks that exactly
// the program's instructions come out, in order, that nothing follows the
// last one, that the FIFO never holds more than its depth, and that with the
// consumer always popping the program streams without gaps once the first
// instruction has arrived and the DRAM answers in one cycle.
// The published design only names an instruction buffer; the FIFO, its depth
// and the prefetch rule checked here are this design's own.
module tb_instr_buffer;
  import fv_pkg::*;
  localparam int DEPTH = IB_DEPTH;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic start = 0, pop = 0;
  logic [23:0] prog_addr = '0;
  logic [15:0] prog_len = '0;
  logic req_valid, req_ready = 1, rsp_valid = 0, out_valid;
  bus_req_t req;
  logic [127:0] rsp_data = '0;
  instr_t out_instr;

  instr_buffer dut (.clk, .rst_n, .start, .prog_addr, .prog_len, .req_valid, .req_ready, .req,
                    .rsp_valid, .rsp_data, .out_valid, .out_instr, .pop);

  logic [127:0] dram [256];
  int checks = 0, failures = 0, cyc = 0;
  bit rand_bus = 1, rand_pop = 1;
  logic [127:0] q_data [$];
  int q_due [$];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  always @(negedge clk) begin
    req_ready = rand_bus ? ($urandom % 3 != 0) : 1'b1;
    rsp_valid = (q_due.size() > 0) && (q_due[0] <= cyc);
    rsp_data  = rsp_valid ? q_data[0] : '0;
    pop       = rand_pop ? ($urandom % 3 == 0) : 1'b1;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rsp_valid) begin void'(q_data.pop_front()); void'(q_due.pop_front()); end
    if (req_valid && req_ready) begin
      chk(!req.we, "fetch is a read");
      q_data.push_back(dram[req.addr[7:0]]);
      q_due.push_back(cyc + (rand_bus ? 1 + $urandom % 8 : 1));
    end
    if (rst_n) chk(32'(dut.cnt) <= DEPTH, "FIFO within depth");
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      automatic int len = 1 + $urandom % 90;
      automatic int base = $urandom % 150;
      automatic int got = 0, gaps = 0, t = 0;
      automatic bit first_seen = 0;
      rand_bus = (trial % 3 != 0);
      rand_pop = (trial % 3 != 0);
      for (int i = 0; i < 50; i++) dram[base + i] = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      prog_addr = 24'(base); prog_len = 16'(len); start = 1;
      @(negedge clk); start = 0;
      while (t < 2000 && got < len) begin
        @(posedge clk);
        if (out_valid && pop) begin
          automatic logic [127:0] beat = dram[base + got / 2];
          chk(out_instr == ((got % 2 == 1) ? beat[127:64] : beat[63:0]), $sformatf("instr %0d of %0d", got, len));
          got++;
          first_seen = 1;
        end else if (first_seen) gaps++;
        t++;
      end
      chk(got == len, $sformatf("count %0d of %0d", got, len));
      if (!rand_bus && !rand_pop) chk(gaps == 0, $sformatf("gapless stream (%0d gaps)", gaps));
      repeat (20) @(posedge clk);
      chk(!out_valid && q_due.size() == 0, "nothing after the last instruction");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

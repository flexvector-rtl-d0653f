// tb_bus_interface: two random masters (reads and posted writes, valid held
// until ready) share the DRAM port through the bus interface. The DRAM model
// answers reads in order after a random latency, with randomly withheld
// ready, and returns a function of the address as data. Checks: each master
// receives exactly its own read data in its own order; writes reach the DRAM
// model with their data; master 0 always wins a simultaneous request; no
// more than FIFO_DEPTH reads are ever outstanding.
// No cycle budget is published for the bus interface; the arbitration and
// FIFO depth checked here are this design's own choices.
module tb_bus_interface;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic m0_valid = 0, m1_valid = 0, m0_ready, m1_ready, m0_rvalid, m1_rvalid;
  bus_req_t m0_req = '0, m1_req = '0, d_req;
  logic [127:0] rdata, d_rdata = '0;
  logic d_valid, d_ready = 1, d_rvalid = 0;

  bus_interface dut (.clk, .rst_n, .m0_valid, .m0_ready, .m0_req, .m0_rvalid, .m1_valid, .m1_ready,
                     .m1_req, .m1_rvalid, .rdata, .d_valid, .d_ready, .d_req, .d_rvalid, .d_rdata);

  function automatic logic [127:0] pat(input logic [23:0] a);
    return {a, 8'h5a, ~a, 8'hc3, a ^ 24'h123456, 8'h77, 24'(a * 7), 8'h01};
  endfunction

  int checks = 0, failures = 0, cyc = 0, outstanding = 0, max_out = 0, both = 0;
  logic [127:0] q_data [$];
  int q_due [$];
  logic [23:0] exp0 [$];
  logic [23:0] exp1 [$];
  logic [127:0] wmem [logic [23:0]];
  logic [127:0] wexp [logic [23:0]];
  int reads0 = 0, reads1 = 0;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  function automatic bus_req_t new_req(input int m);
    bus_req_t r;
    r.we = ($urandom % 4 == 0);
    r.addr = 24'({m[0], 7'($urandom)});
    r.wdata = {$urandom, $urandom, $urandom, $urandom};
    return r;
  endfunction

  always @(negedge clk) begin
    d_ready  = ($urandom % 4 != 0);
    d_rvalid = (q_due.size() > 0) && (q_due[0] <= cyc);
    d_rdata  = d_rvalid ? q_data[0] : '0;
    if (!m0_valid && ($urandom % 3 == 0) && cyc < 4000) begin m0_valid = 1; m0_req = new_req(0); end
    if (!m1_valid && ($urandom % 2 == 0) && cyc < 4000) begin m1_valid = 1; m1_req = new_req(1); end
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (m0_valid && m1_valid) begin both++; chk(!m1_ready, "master 0 priority"); end
    chk(!(m0_ready && m1_ready), "one grant per cycle");
    if (d_rvalid) begin void'(q_data.pop_front()); void'(q_due.pop_front()); outstanding--; end
    if (d_valid && d_ready) begin
      if (d_req.we) wmem[d_req.addr] = d_req.wdata;
      else begin
        q_data.push_back(pat(d_req.addr)); q_due.push_back(cyc + 2 + $urandom % 12);
        outstanding++;
      end
    end
    if (outstanding > max_out) max_out = outstanding;
    chk(outstanding <= 8, "outstanding reads");
    if (m0_rvalid) begin
      chk(exp0.size() > 0 && rdata == pat(exp0[0]), "m0 read data"); void'(exp0.pop_front()); reads0++;
    end
    if (m1_rvalid) begin
      chk(exp1.size() > 0 && rdata == pat(exp1[0]), "m1 read data"); void'(exp1.pop_front()); reads1++;
    end
    chk(!(m0_rvalid && m1_rvalid), "one response owner");
    if (m0_valid && m0_ready) begin
      if (m0_req.we) wexp[m0_req.addr] = m0_req.wdata; else exp0.push_back(m0_req.addr);
      m0_valid <= 0;
    end
    if (m1_valid && m1_ready) begin
      if (m1_req.we) wexp[m1_req.addr] = m1_req.wdata; else exp1.push_back(m1_req.addr);
      m1_valid <= 0;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (cyc >= 4100);
    chk(exp0.size() == 0 && exp1.size() == 0, "all reads answered");
    foreach (wexp[a]) chk(wmem.exists(a) && wmem[a] == wexp[a], $sformatf("write %0h", a));
    chk(reads0 > 100 && reads1 > 100 && both > 100, "traffic from both masters");
    chk(max_out == 8, $sformatf("response FIFO filled (max %0d)", max_out));
    $display("reads m0=%0d m1=%0d contended=%0d max_outstanding=%0d", reads0, reads1, both, max_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dma: runs random LD_S, LD_D and ST_D transfers through the DMA against a
// DRAM model (in-order read responses after a programmable latency, randomly
// withheld ready in half of the runs), a Sparse Buffer model (a 128-bit beat
// becomes four words at the beat's word address) and a Dense Buffer port
// model (one-cycle read latency). Every word the DMA writes is compared with
// a reference copy, and in runs with ready always high the busy time is
// checked: n + latency cycles for a load of n beats, 3n for a store.
// The three transfer instructions follow the published design; the bus
// protocol and the cycle counts checked here are this design's own.
module tb_dma;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic start = 0;
  dma_op_e op = DMA_LD_S;
  logic [23:0] dram_addr = '0;
  logic [7:0] buf_addr = '0;
  logic [15:0] len = '0;
  logic req_valid, req_ready = 1, rsp_valid = 0;
  bus_req_t req;
  logic [127:0] rsp_data = '0;
  logic sb_we, db_en, db_we, busy;
  logic [5:0] sb_waddr;
  logic [127:0] sb_wdata, db_wdata, db_rdata = '0;
  logic [6:0] db_addr;

  dma dut (.clk, .rst_n, .start, .op, .dram_addr, .buf_addr, .len, .req_valid, .req_ready, .req,
           .rsp_valid, .rsp_data, .sb_we, .sb_waddr, .sb_wdata, .db_en, .db_we, .db_addr, .db_wdata,
           .db_rdata, .busy);

  logic [127:0] dram [1024];
  logic [31:0]  sbm [64];
  logic [127:0] dbm [128];
  int checks = 0, failures = 0;
  int cyc = 0, lat = 4;
  bit rand_rdy = 0;
  logic [127:0] q_data [$];
  int q_due [$];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  always @(negedge clk) begin
    req_ready = rand_rdy ? ($urandom % 3 != 0) : 1'b1;
    rsp_valid = (q_due.size() > 0) && (q_due[0] <= cyc);
    rsp_data  = rsp_valid ? q_data[0] : '0;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rsp_valid) begin void'(q_data.pop_front()); void'(q_due.pop_front()); end
    if (req_valid && req_ready) begin
      if (req.we) dram[req.addr[9:0]] <= req.wdata;
      else begin q_data.push_back(dram[req.addr[9:0]]); q_due.push_back(cyc + lat); end
    end
    if (sb_we) for (int i = 0; i < 4; i++) sbm[{sb_waddr[5:2], 2'(i)}] <= sb_wdata[32*i +: 32];
    if (db_en) begin
      if (db_we) dbm[db_addr] <= db_wdata;
      db_rdata <= dbm[db_addr];
    end
  end

  initial begin
    logic [31:0] sref [64];
    logic [127:0] dref [128];
    logic [127:0] mref [1024];
    int n, a, b, t;
    for (int i = 0; i < 1024; i++) begin dram[i] = {$urandom, $urandom, $urandom, $urandom}; mref[i] = dram[i]; end
    for (int i = 0; i < 64; i++) begin sbm[i] = '0; sref[i] = '0; end
    for (int i = 0; i < 128; i++) begin dbm[i] = {$urandom, $urandom, $urandom, $urandom}; dref[i] = dbm[i]; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      automatic int kind = $urandom % 3;
      rand_rdy = (trial % 2 == 1);
      lat = 1 + $urandom % 10;
      a = $urandom % 1000;
      if (kind == 0) begin n = 1 + $urandom % 16; b = 4 * ($urandom % (17 - n)); end
      else begin n = 1 + $urandom % 24; b = $urandom % (129 - n); end
      if (a + n > 1024) a = 1024 - n;
      @(negedge clk);
      op = (kind == 0) ? DMA_LD_S : (kind == 1) ? DMA_LD_D : DMA_ST_D;
      dram_addr = 24'(a); buf_addr = 8'(b); len = 16'(n); start = 1;
      @(negedge clk); start = 0;
      t = 0;
      while (busy) begin t++; @(negedge clk); end
      for (int j = 0; j < n; j++) begin
        if (kind == 0) for (int i = 0; i < 4; i++) sref[b/4*4 + 4*j + i] = mref[a + j][32*i +: 32];
        else if (kind == 1) dref[b + j] = mref[a + j];
        else mref[a + j] = dref[b + j];
      end
      @(negedge clk);
      if (kind == 0) for (int i = 0; i < 64; i++) chk(sbm[i] == sref[i], $sformatf("LD_S word %0d", i));
      else if (kind == 1) for (int i = 0; i < 128; i++) chk(dbm[i] == dref[i], $sformatf("LD_D row %0d", i));
      else for (int i = 0; i < n; i++) chk(dram[a + i] == mref[a + i], $sformatf("ST_D beat %0d", a + i));
      if (!rand_rdy) chk(t == ((kind == 2) ? 3 * n : n + lat),
                         $sformatf("op %0d n %0d lat %0d busy %0d", kind, n, lat, t));
    end
    // a zero-length transfer does nothing
    @(negedge clk); op = DMA_LD_D; len = 0; start = 1;
    @(negedge clk); start = 0;
    chk(!busy, "zero-length transfer");
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

// tb_csr_decoder: builds random CSR tiles (with empty rows and full rows)
// in a model of the Sparse Buffer, runs CAL_IDX and checks every row index
// buffer write (bitmap of used columns minus the fixed mask) and its cycle
// count (2*nrows + nnz + 4 busy cycles), then runs CMP on every row in random
// order and checks the streamed (scalar, column) pairs, the row-done flag,
// the start latency (first nonzero 2 cycles after cmp_start) and the busy
// time (nnz + 3 cycles).
// The bitmap semantics (misses only, fixed rows removed) follow the
// published design; the tile layout and the cycle counts are this design's
// own.
module tb_csr_decoder;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic cal_start = 0, cmp_start = 0;
  logic [5:0] cal_nrows = '0;
  logic [4:0] cmp_row = '0;
  logic [5:0] sb_base = '0;
  logic [15:0] fixed_mask = '0;
  logic sb_re;
  logic [5:0] sb_raddr;
  logic [31:0] sb_rdata;
  logic rib_we;
  logic [4:0] rib_waddr;
  logic [15:0] rib_wdata;
  logic out_valid, out_last, busy;
  logic [31:0] out_scalar;
  logic [3:0] out_col;

  logic [31:0] sbm [64];
  always @(posedge clk) if (sb_re) sb_rdata <= sbm[sb_raddr];

  csr_decoder dut (.clk, .rst_n, .cal_start, .cal_nrows, .cmp_start, .cmp_row, .sb_base, .fixed_mask,
                   .sb_re, .sb_raddr, .sb_rdata, .rib_we, .rib_waddr, .rib_wdata,
                   .out_valid, .out_scalar, .out_col, .out_last, .busy);

  int checks = 0, failures = 0;
  int nrows, nnz;
  int rcols [32][$];
  int rvals [32][$];
  logic [15:0] rib_seen [32];
  bit rib_got [32];

  always @(posedge clk) if (rib_we) begin rib_seen[rib_waddr] <= rib_wdata; rib_got[rib_waddr] <= 1; end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      int w, base, cyc;
      // random tile that fits in 64 words
      nrows = 1 + $urandom % 12;
      base = (trial % 2 == 1) ? 8 : 0;
      nnz = 0;
      for (int r = 0; r < nrows; r++) begin
        automatic int n = ($urandom % 5 == 0) ? 0 : 1 + $urandom % 5;
        if (r == 1) n = 0;
        rcols[r].delete(); rvals[r].delete();
        if (base + nrows + 1 + nnz + n > 64) n = 0;
        for (int x = 0; x < n; x++) begin
          rcols[r].push_back($urandom % 16);
          rvals[r].push_back(int'($urandom % 32'h100_0000) - 32'h80_0000);
        end
        nnz += n;
      end
      w = 0;
      for (int r = 0; r < nrows; r++) begin sbm[base + r] = 32'(w); w += rcols[r].size(); end
      sbm[base + nrows] = 32'(w);
      w = base + nrows + 1;
      for (int r = 0; r < nrows; r++)
        foreach (rcols[r][x]) sbm[w++] = {8'(rcols[r][x]), 24'(rvals[r][x])};
      for (int r = 0; r < 32; r++) rib_got[r] = 0;
      // CAL_IDX
      @(negedge clk);
      sb_base = 6'(base); fixed_mask = 16'($urandom);
      cal_nrows = 6'(nrows); cal_start = 1;
      @(negedge clk); cal_start = 0;
      cyc = 0;
      while (busy) begin cyc++; @(negedge clk); end
      chk(cyc == 2*nrows + nnz + 4, $sformatf("CAL_IDX cycles %0d exp %0d", cyc, 2*nrows + nnz + 4));
      for (int r = 0; r < nrows; r++) begin
        automatic logic [15:0] bm = '0;
        foreach (rcols[r][x]) bm[rcols[r][x]] = 1'b1;
        chk(rib_got[r] && rib_seen[r] == (bm & ~fixed_mask), $sformatf("bitmap row %0d", r));
      end
      // CMP on every row, random order
      for (int k = 0; k < nrows; k++) begin
        automatic int r = $urandom % nrows;
        automatic int idx = 0, first = -1, lastc = -1;
        @(negedge clk); cmp_row = 5'(r); cmp_start = 1;
        @(negedge clk); cmp_start = 0;
        cyc = 0;
        while (busy) begin
          if (out_valid) begin
            if (first < 0) first = cyc;
            chk(idx < rcols[r].size() && out_col == 4'(rcols[r][idx]) && out_scalar == 32'(rvals[r][idx]),
                $sformatf("stream row %0d idx %0d", r, idx));
            idx++;
          end
          if (out_last) lastc = cyc;
          cyc++;
          @(negedge clk);
        end
        chk(idx == rcols[r].size(), $sformatf("row %0d count %0d", r, idx));
        chk(lastc == rcols[r].size() + 1, $sformatf("row-done flag at %0d", lastc));
        chk(rcols[r].size() == 0 || first == 1, "first nonzero latency");
        chk(cyc == rcols[r].size() + 3, $sformatf("CMP busy %0d", cyc));
      end
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

// tb_vex: the Vector Execution Unit on random tiles in INT8 and INT32
// precision. Models: a Sparse Buffer (one-cycle read) holding a CSR tile and
// a VRF (tag -> row lookup, combinational) holding the tile's dense rows and
// a partial-sum row. Per tile it runs CAL_IDX, reads back the row index
// buffer, then runs CMP on each sparse row, with and without a partial sum,
// and checks against a reference computed here element by element:
//   INT8 : out[e] = low 8 bits of (sum over nonzeros of int8(val) * int8(row[col][e]) + psum[e])
//   INT32: out[l] = low 32 bits of (sum of val * row[col][l] + psum[l])
// plus the single result write (address, data), the VRF invalidate of the
// destination, the group release (alternating from 0 after Config), the MAC
// count, and the CMP latency of nnz+4 cycles (nnz+5 with a partial sum).
// A final CMP with a row removed from the VRF model must raise vrf_miss.
// The CMP semantics (row-wise product, partial-sum flag, result to the Dense
// Buffer) follow the published design; the cycle counts are this design's
// own.
module tb_vex;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic cfg_load = 0, cal_start = 0, cmp_start = 0, cmp_psum = 0;
  prec_e prec = PREC_INT8;
  logic [15:0] fixed_mask = '0;
  logic [6:0] tile_base = '0, cmp_psum_addr = '0, cmp_dest = '0;
  logic [5:0] sb_base = '0, cal_nrows = '0;
  logic [4:0] cmp_row = '0, rib_raddr = '0;
  logic sb_re;
  logic [5:0] sb_raddr;
  logic [31:0] sb_rdata = '0;
  logic [15:0] rib_rdata;
  logic [6:0] vrf_ltag, vrf_inv_tag, db_waddr, cmp_dest_o;
  logic vrf_lhit, vrf_rel_en, vrf_rel_grp, vrf_inv_en, db_we, dec_busy, cmp_busy, mac_fire, vrf_miss;
  logic [127:0] vrf_ldata, db_wdata;

  vex dut (.clk, .rst_n, .cfg_load, .prec, .fixed_mask, .tile_base, .sb_base, .cal_start, .cal_nrows,
           .cmp_start, .cmp_row, .cmp_psum, .cmp_psum_addr, .cmp_dest, .sb_re, .sb_raddr, .sb_rdata,
           .rib_raddr, .rib_rdata, .vrf_ltag, .vrf_lhit, .vrf_ldata, .vrf_rel_en, .vrf_rel_grp,
           .vrf_inv_en, .vrf_inv_tag, .db_we, .db_waddr, .db_wdata, .dec_busy, .cmp_busy, .cmp_dest_o,
           .mac_fire, .vrf_miss);

  logic [31:0]  sbm [64];
  logic [127:0] rows [128];
  logic         rv [128];
  always @(posedge clk) if (sb_re) sb_rdata <= sbm[sb_raddr];
  assign vrf_lhit  = rv[vrf_ltag];
  assign vrf_ldata = rows[vrf_ltag];

  int checks = 0, failures = 0;
  int n_we = 0, n_mac = 0, n_inv = 0, n_rel = 0;
  logic [6:0] we_addr, inv_tag;
  logic [127:0] we_data;
  bit rel_g;
  always @(posedge clk) begin
    if (mac_fire) n_mac++;
    if (db_we) begin n_we++; we_addr = db_waddr; we_data = db_wdata; end
    if (vrf_inv_en) begin n_inv++; inv_tag = vrf_inv_tag; end
    if (vrf_rel_en) begin n_rel++; rel_g = vrf_rel_grp; end
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  int rc [32][$];
  int rval [32][$];

  function automatic logic [127:0] ref_row(input int r, input bit ps, input logic [127:0] p, input prec_e pr);
    logic [127:0] o;
    if (pr == PREC_INT8) begin
      for (int e = 0; e < 16; e++) begin
        int s = ps ? int'($signed(p[8*e +: 8])) : 0;
        foreach (rc[r][x]) s += int'($signed(8'(rval[r][x]))) * int'($signed(rows[int'(tile_base) + rc[r][x]][8*e +: 8]));
        o[8*e +: 8] = 8'(s);
      end
    end else begin
      for (int l = 0; l < 4; l++) begin
        logic [31:0] s = ps ? p[32*l +: 32] : 32'd0;
        foreach (rc[r][x]) s += 32'(rval[r][x]) * rows[int'(tile_base) + rc[r][x]][32*l +: 32];
        o[32*l +: 32] = s;
      end
    end
    return o;
  endfunction

  initial begin
    int nrows, w, g;
    for (int i = 0; i < 128; i++) begin rows[i] = '0; rv[i] = 0; end
    for (int i = 0; i < 64; i++) sbm[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 40; tile++) begin
      automatic int nnz = 0;
      nrows = 1 + $urandom % 10;
      for (int i = 0; i < 128; i++) begin rows[i] = {$urandom, $urandom, $urandom, $urandom}; rv[i] = 1; end
      for (int r = 0; r < nrows; r++) begin
        automatic int n = (r == 0) ? 1 + $urandom % 5 : $urandom % 6;
        rc[r].delete(); rval[r].delete();
        if (nrows + 1 + nnz + n > 64) n = 0;
        for (int x = 0; x < n; x++) begin
          rc[r].push_back($urandom % 16);
          rval[r].push_back(int'($urandom % 32'h100_0000) - 32'h80_0000);
        end
        nnz += n;
      end
      w = 0;
      for (int r = 0; r < nrows; r++) begin sbm[r] = 32'(w); w += rc[r].size(); end
      sbm[nrows] = 32'(w);
      w = nrows + 1;
      for (int r = 0; r < nrows; r++) foreach (rc[r][x]) sbm[w++] = {8'(rc[r][x]), 24'(rval[r][x])};
      // Config
      @(negedge clk);
      prec = (tile % 2 == 1) ? PREC_INT32 : PREC_INT8;
      fixed_mask = 16'($urandom); tile_base = 7'(16 * ($urandom % 6)); sb_base = '0;
      cfg_load = 1;
      @(negedge clk); cfg_load = 0;
      g = 0;
      // CAL_IDX
      cal_nrows = 6'(nrows); cal_start = 1;
      @(negedge clk); cal_start = 0;
      while (dec_busy) @(negedge clk);
      for (int r = 0; r < nrows; r++) begin
        automatic logic [15:0] bm = '0;
        foreach (rc[r][x]) bm[rc[r][x]] = 1'b1;
        rib_raddr = 5'(r);
        #1 chk(rib_rdata == (bm & ~fixed_mask), $sformatf("row index buffer row %0d", r));
      end
      // CMP on each row
      for (int r = 0; r < nrows; r++) begin
        automatic bit ps = ($urandom % 2 == 1);
        automatic int cyc = 0, we0 = n_we, mac0 = n_mac, inv0 = n_inv, rel0 = n_rel;
        automatic logic [6:0] pa = 7'(96 + $urandom % 16);
        automatic logic [6:0] da = 7'(112 + $urandom % 16);
        automatic logic [127:0] exp_o = ref_row(r, ps, rows[pa], prec);
        @(negedge clk);
        cmp_row = 5'(r); cmp_psum = ps; cmp_psum_addr = pa; cmp_dest = da; cmp_start = 1;
        @(negedge clk); cmp_start = 0;
        cyc = 1;
        while (cmp_busy) begin
          chk(cmp_dest_o == da, "cmp_dest output");
          cyc++; @(negedge clk);
        end
        chk(cyc == rc[r].size() + 4 + (ps ? 1 : 0), $sformatf("CMP cycles %0d nnz %0d psum %0d", cyc, rc[r].size(), ps));
        chk(n_we == we0 + 1 && we_addr == da, "one result write to the destination");
        chk(we_data == exp_o, $sformatf("result row %0d prec %0d psum %0d: %h exp %h", r, prec, ps, we_data, exp_o));
        chk(n_mac == mac0 + rc[r].size() + (ps ? 1 : 0), "MAC count");
        chk(n_inv == inv0 + 1 && inv_tag == da, "VRF invalidate of destination");
        chk(n_rel == rel0 + 1 && rel_g == 1'(g), "group release");
        g ^= 1;
      end
      chk(!vrf_miss, "no VRF miss with all rows present");
    end
    // a missing row raises vrf_miss and counts as zero
    begin
      automatic int r = 0;  // row 0 always has a nonzero
      rv[int'(tile_base) + rc[r][0]] = 0;
      @(negedge clk); cmp_row = 5'(r); cmp_psum = 0; cmp_start = 1;
      @(negedge clk); cmp_start = 0;
      while (cmp_busy) @(negedge clk);
      chk(vrf_miss, "vrf_miss raised");
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

// tb_vrf_mover: drives the VRF mover against a Dense Buffer model (random
// 128-bit rows, one-cycle read latency, randomly withheld port grant), a row
// index buffer model and a VRF lock model. It checks:
//  * MV_Fixed: the masked rows of the tile arrive in VRF rows 0..k-1 in
//    increasing column order with the right data and tag, unlocked, and take
//    k+1 busy cycles when the port is always granted;
//  * MV_Dyn: the miss rows (and the optional partial-sum row, last) arrive in
//    ring order through the dynamic region [k, DEPTH), locked, with the group
//    bit alternating per command; misses+1 busy cycles with no stalls;
//  * no write ever lands on a row that is still locked (the test releases the
//    previous command's group after a random delay, as a finishing CMP would);
//  * no partial-sum row is read while a CMP that writes it is in progress;
//  * each stall output (lock, psum, port) fires at least once.
// MV_Fixed/MV_Dyn follow the published design; the ring, locks, interlocks
// and one-row-per-cycle timing checked here are this design's own.
module tb_vrf_mover;
  import fv_pkg::*;
  localparam int D = VRF_DEPTH;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic cfg_load = 0, fix_start = 0, dyn_start = 0, dyn_psum = 0;
  logic [4:0] cfg_k = '0;
  logic [15:0] fixed_mask = '0;
  logic [6:0] tile_base = '0, psum_addr = '0;
  logic [4:0] dyn_row = '0, rib_raddr;
  logic [15:0] rib_rdata;
  logic db_req, db_gnt = 1, vrf_we, vrf_wlock, vrf_wgrp, busy, stall_lock, stall_psum, stall_port;
  logic [6:0] db_addr, cmp_dest = '0, vrf_wtag;
  logic [127:0] db_rdata = '0, vrf_wdata;
  logic cmp_busy = 0;
  logic [3:0] vrf_wslot;
  logic [D-1:0] locked = '0;
  logic [D-1:0] lgrp = '0;

  logic [127:0] dbm [128];
  logic [15:0] ribm [32];
  assign rib_rdata = ribm[rib_raddr];
  always @(posedge clk) db_rdata <= dbm[db_addr];

  vrf_mover dut (.clk, .rst_n, .cfg_load, .cfg_k, .fixed_mask, .tile_base, .fix_start, .dyn_start,
                 .dyn_row, .dyn_psum, .psum_addr, .rib_raddr, .rib_rdata, .db_req, .db_addr, .db_gnt,
                 .db_rdata, .cmp_busy, .cmp_dest, .vrf_locked(locked), .vrf_we, .vrf_wslot, .vrf_wdata,
                 .vrf_wtag, .vrf_wlock, .vrf_wgrp, .busy, .stall_lock, .stall_psum, .stall_port);

  int checks = 0, failures = 0;
  int n_lock = 0, n_psum = 0, n_port = 0;
  bit rand_gnt = 0;
  bit rel_req = 0;
  bit rel_g = 0;
  // expected writes
  int  e_slot [$];
  int  e_tag  [$];
  bit  e_lock [$];
  bit  e_grp  [$];

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  // port grant, lock bookkeeping, write checking, interlock checking
  always @(negedge clk) db_gnt = rand_gnt ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk) begin
    if (stall_lock) n_lock++;
    if (stall_psum) n_psum++;
    if (stall_port) n_port++;
    if (db_req && db_gnt && cmp_busy && db_addr == cmp_dest) begin
      checks++; failures++; $display("FAIL read of row %0d while CMP writes it", db_addr);
    end
    if (vrf_we) begin
      checks++;
      if (locked[vrf_wslot]) begin failures++; $display("FAIL write to locked row %0d", vrf_wslot); end
      if (e_slot.size() == 0) begin
        checks++; failures++; $display("FAIL unexpected VRF write");
      end else begin
        automatic int s = e_slot.pop_front();
        automatic int t = e_tag.pop_front();
        automatic bit l = e_lock.pop_front();
        automatic bit g = e_grp.pop_front();
        chk(32'(vrf_wslot) == s && 32'(vrf_wtag) == t && vrf_wdata == dbm[t] && vrf_wlock == l && (!l || vrf_wgrp == g),
            $sformatf("write slot %0d/%0d tag %0d/%0d lock %0d grp %0d/%0d", vrf_wslot, s, vrf_wtag, t, vrf_wlock, vrf_wgrp, g));
      end
    end
    if (rel_req) for (int i = 0; i < D; i++) if (lgrp[i] == rel_g) locked[i] <= 1'b0;
    if (vrf_we && vrf_wlock) begin locked[vrf_wslot] <= 1'b1; lgrp[vrf_wslot] <= vrf_wgrp; end
  end

  task automatic run_until_idle(output int cyc);
    cyc = 0;
    @(negedge clk);
    while (busy) begin cyc++; @(negedge clk); end
  endtask

  initial begin
    int k, ring, grp, cyc;
    for (int i = 0; i < 128; i++) dbm[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 40; tile++) begin
      // Config + MV_Fixed
      automatic logic [15:0] m = '0;
      automatic int want_k = $urandom % 9;
      while ($countones(m) < want_k) m[$urandom % 16] = 1'b1;
      k = want_k;
      rand_gnt = (tile % 2 == 1);
      @(negedge clk);
      fixed_mask = m; cfg_k = 5'(k); tile_base = 7'(16 * ($urandom % 6)); cfg_load = 1;
      locked = '0;
      @(negedge clk); cfg_load = 0;
      ring = k; grp = 0;
      begin
        automatic int s = 0;
        for (int c = 0; c < 16; c++) if (m[c]) begin
          e_slot.push_back(s++); e_tag.push_back(int'(tile_base) + c); e_lock.push_back(0); e_grp.push_back(0);
        end
      end
      fix_start = 1;
      @(negedge clk); fix_start = 0;
      cyc = 1;
      while (busy) begin cyc++; @(negedge clk); end
      chk(e_slot.size() == 0, "MV_Fixed rows all written");
      if (!rand_gnt) chk(cyc - 1 == k + 1, $sformatf("MV_Fixed busy %0d exp %0d", cyc - 1, k + 1));
      // a run of MV_Dyn commands
      for (int r = 0; r < 16; r++) begin
        automatic bit ps = ($urandom % 3 == 0);
        automatic int room = D - k - (ps ? 1 : 0);
        automatic logic [15:0] b = '0;
        automatic int nm = $urandom % (room + 1);
        automatic int dly = 1 + $urandom % 12;
        automatic int pdl = ps ? 1 + $urandom % 6 : 0;
        automatic bit stalled_any;
        while ($countones(b) < nm) begin
          automatic int c = $urandom % 16;
          if (!m[c]) b[c] = 1'b1;
          else if ($countones(~m) <= $countones(b)) break;
        end
        nm = $countones(b);
        ribm[r] = b;
        for (int c = 0; c < 16; c++) if (b[c]) begin
          e_slot.push_back(ring); e_tag.push_back(int'(tile_base) + c); e_lock.push_back(1); e_grp.push_back(grp[0]);
          ring = (ring == D - 1) ? k : ring + 1;
        end
        @(negedge clk);
        dyn_row = 5'(r); dyn_psum = ps; psum_addr = 7'(96 + $urandom % 32);
        if (ps) begin
          e_slot.push_back(ring); e_tag.push_back(int'(psum_addr)); e_lock.push_back(1); e_grp.push_back(grp[0]);
          ring = (ring == D - 1) ? k : ring + 1;
          cmp_busy = 1; cmp_dest = ($urandom % 4 == 0) ? 7'(psum_addr ^ 7'd1) : psum_addr;
        end
        dyn_start = 1;
        @(negedge clk); dyn_start = 0;
        cyc = 1; stalled_any = 0;
        while (busy) begin
          if (stall_lock || stall_psum || stall_port) stalled_any = 1;
          if (cyc == dly) begin rel_req = 1; rel_g = ~grp[0]; end else rel_req = 0;
          if (cyc == pdl) cmp_busy = 0;
          cyc++;
          @(negedge clk);
        end
        rel_req = 0; cmp_busy = 0;
        chk(e_slot.size() == 0, "MV_Dyn rows all written");
        if (!stalled_any) chk(cyc - 1 == nm + (ps ? 1 : 0) + 1, $sformatf("MV_Dyn busy %0d exp %0d", cyc - 1, nm + (ps ? 1 : 0) + 1));
        // the previous group is released by now in any case (its CMP ended)
        @(negedge clk); rel_req = 1; rel_g = ~grp[0];
        @(negedge clk); rel_req = 0;
        grp ^= 1;
      end
    end
    chk(n_lock > 0, $sformatf("lock stall seen %0d", n_lock));
    chk(n_psum > 0, $sformatf("psum stall seen %0d", n_psum));
    chk(n_port > 0, $sformatf("port stall seen %0d", n_port));
    $display("stalls: lock=%0d psum=%0d port=%0d", n_lock, n_psum, n_port);
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

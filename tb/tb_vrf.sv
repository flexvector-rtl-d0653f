// tb_vrf: random writes, lock releases, tag invalidations and clears on the
// flexible VRF, checked every cycle against a model: associative lookup
// (hit, lowest matching row, data) and the lock vector.
// Timing: writes, releases and invalidates at the clock edge, lookup
// combinational. The fixed/dynamic split follows the published design; tags
// and locks are this design's own.
module tb_vrf;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic clear_all = 0, we = 0, wlock = 0, wgrp = 0, rel_en = 0, rel_grp = 0, inv_en = 0;
  logic [3:0] wslot = '0, l_slot;
  logic [127:0] wdata = '0, l_data;
  logic [6:0] wtag = '0, inv_tag = '0, l_tag = '0;
  logic l_hit;
  logic [11:0] locked;

  logic [127:0] m_data [12];
  logic [6:0]   m_tag [12];
  bit           m_valid [12], m_lock [12], m_grp [12];
  int checks = 0, failures = 0, hits = 0;

  vrf dut (.clk, .rst_n, .clear_all, .we, .wslot, .wdata, .wtag, .wlock, .wgrp,
           .rel_en, .rel_grp, .inv_en, .inv_tag, .l_tag, .l_hit, .l_slot, .l_data, .locked);

  initial begin
    for (int i = 0; i < 12; i++) begin m_valid[i] = 0; m_lock[i] = 0; m_grp[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      automatic bit ehit = 0;
      automatic int eslot = 0;
      @(negedge clk);
      clear_all = ($urandom % 200) == 0;
      we = ($urandom % 2); wslot = 4'($urandom % 12); wdata = {$urandom, $urandom, $urandom, $urandom};
      wtag = 7'($urandom % 16); wlock = $urandom % 2; wgrp = $urandom % 2;
      rel_en = ($urandom % 5) == 0; rel_grp = $urandom % 2;
      inv_en = ($urandom % 6) == 0; inv_tag = 7'($urandom % 16);
      l_tag = 7'($urandom % 16);
      #1;
      for (int i = 11; i >= 0; i--) if (m_valid[i] && m_tag[i] == l_tag) begin ehit = 1; eslot = i; end
      checks++;
      if (l_hit !== ehit || (ehit && (l_slot !== 4'(eslot) || l_data !== m_data[eslot]))) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d lookup tag %0d hit %0d/%0d slot %0d/%0d", t, l_tag, l_hit, ehit, l_slot, eslot);
      end
      if (ehit) hits++;
      for (int i = 0; i < 12; i++) begin
        checks++;
        if (locked[i] !== m_lock[i]) begin failures++; if (failures < 10) $display("FAIL lock %0d", i); end
      end
      @(posedge clk);
      if (clear_all) for (int i = 0; i < 12; i++) begin m_valid[i] = 0; m_lock[i] = 0; end
      else begin
        for (int i = 0; i < 12; i++) begin
          if (inv_en && m_valid[i] && m_tag[i] == inv_tag) m_valid[i] = 0;
          if (rel_en && m_lock[i] && m_grp[i] == rel_grp) m_lock[i] = 0;
        end
        if (we) begin
          m_valid[wslot] = 1; m_lock[wslot] = wlock; m_grp[wslot] = wgrp;
        end
      end
      if (we) begin m_data[wslot] = wdata; m_tag[wslot] = wtag; end
    end
    checks++;
    if (hits < 100) failures++;
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

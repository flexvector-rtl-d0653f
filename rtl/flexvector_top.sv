// flexvector_top: the FlexVector SpMM vector processor.
//
// One vector engine for both sparse-dense products of a GCN layer, computed
// row by row (Gustavson order): output row i = sum over the nonzeros a(i,c)
// of a(i,c) x dense row c. Dense rows are staged in a small Dense Buffer and
// moved into a flexible VRF whose fixed region keeps the tile's most reused
// rows and whose dynamic region is refilled per sparse row; every VRF row is
// a full 128-bit vector, so lanes never need per-lane (banked) access.
//
// Blocks: instruction buffer with prefetcher, controller with the vector
// instruction decoder, bus interface, DMA, Sparse Buffer (256 B), Dense
// Buffer (2 KB), VRF (12 rows), data mover, and the vector execution unit
// (CSR decoder, row index buffer, unpack/pack networks, 4 x 32-bit lanes).
//
// Interface: pulse `start` with prog_addr (DRAM beat address) and prog_len
// (instructions); the program runs until HALT, then `done` stays high until
// the next start. The DRAM port is a 128-bit valid/ready request channel
// (we, beat address, write data) with in-order read responses
// (mem_rsp_valid, mem_rsp_data) that cannot be refused. vrf_miss is a sticky
// program-error flag (a CMP found a dense row absent from the VRF).
// `perf` holds event counters, cleared by `start`.
// The Dense Buffer's second port is shared: CMP result writes have priority,
// VRF moves wait a cycle.
module flexvector_top
  import fv_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [DRAM_AW-1:0] prog_addr,
  input  logic [15:0]        prog_len,
  output logic               done,
  output logic               vrf_miss,
  output perf_t              perf,
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output bus_req_t           mem_req,
  input  logic               mem_rsp_valid,
  input  logic [VLEN-1:0]    mem_rsp_data
);

  localparam int unsigned SW  = $clog2(VRF_DEPTH);
  localparam int unsigned RAW = $clog2(RIB_DEPTH);

  // bus
  logic m0_valid, m0_ready, m0_rvalid, m1_valid, m1_ready, m1_rvalid;
  bus_req_t m0_req, m1_req;
  logic [VLEN-1:0] bus_rdata;

  // instruction stream
  logic   ib_valid, ib_pop;
  instr_t ib_instr;

  // controller outputs
  logic               cfg_load, double_vrf;
  logic [TILE-1:0]    fixed_mask;
  logic [SW:0]        cfg_k;
  prec_e              prec;
  logic [DB_AW-1:0]   tile_base;
  logic [SB_AW-1:0]   sb_base;
  logic               dma_start;
  dma_op_e            dma_op;
  logic [DRAM_AW-1:0] dma_dram_addr;
  logic [7:0]         dma_buf_addr;
  logic [15:0]        dma_len;
  logic               cal_start, cmp_start, cmp_psum, fix_start, dyn_start, dyn_psum;
  logic [RAW:0]       cal_nrows;
  logic [RAW-1:0]     cmp_row, dyn_row;
  logic [DB_AW-1:0]   cmp_psum_addr, cmp_dest, psum_addr;
  logic               issue_stall;

  // unit status
  logic dma_busy, dec_busy, cmp_busy, mv_busy;

  // buffers
  logic               sb_we, sb_re;
  logic [SB_AW-1:0]   sb_waddr, sb_raddr;
  logic [VLEN-1:0]    sb_wdata;
  logic [31:0]        sb_rdata;
  logic               dba_en, dba_we;
  logic [DB_AW-1:0]   dba_addr;
  logic [VLEN-1:0]    dba_wdata, dba_rdata;
  logic               dbb_en, dbb_we;
  logic [DB_AW-1:0]   dbb_addr;
  logic [VLEN-1:0]    dbb_rdata;

  // VEX <-> VRF / mover / Dense Buffer
  logic [RAW-1:0]     rib_raddr;
  logic [TILE-1:0]    rib_rdata;
  logic [DB_AW-1:0]   vrf_ltag, vrf_inv_tag, cmp_dest_o;
  logic               vrf_lhit, vrf_rel_en, vrf_rel_grp, vrf_inv_en;
  logic [SW-1:0]      vrf_lslot;
  logic [VLEN-1:0]    vrf_ldata;
  logic               vx_we, mac_fire;
  logic [DB_AW-1:0]   vx_waddr;
  logic [VLEN-1:0]    vx_wdata;

  // mover
  logic               mv_req, mv_gnt;
  logic [DB_AW-1:0]   mv_addr;
  logic [VRF_DEPTH-1:0] vrf_locked;
  logic               vrf_we, vrf_wlock, vrf_wgrp;
  logic [SW-1:0]      vrf_wslot;
  logic [VLEN-1:0]    vrf_wdata;
  logic [DB_AW-1:0]   vrf_wtag;
  logic               stall_lock, stall_psum, stall_port;

  bus_interface u_bus (
    .clk, .rst_n,
    .m0_valid, .m0_ready, .m0_req, .m0_rvalid,
    .m1_valid, .m1_ready, .m1_req, .m1_rvalid,
    .rdata(bus_rdata),
    .d_valid(mem_req_valid), .d_ready(mem_req_ready), .d_req(mem_req),
    .d_rvalid(mem_rsp_valid), .d_rdata(mem_rsp_data)
  );

  instr_buffer u_ib (
    .clk, .rst_n, .start, .prog_addr, .prog_len,
    .req_valid(m1_valid), .req_ready(m1_ready), .req(m1_req),
    .rsp_valid(m1_rvalid), .rsp_data(bus_rdata),
    .out_valid(ib_valid), .out_instr(ib_instr), .pop(ib_pop)
  );

  controller u_ctrl (
    .clk, .rst_n, .start, .done,
    .in_valid(ib_valid), .in_instr(ib_instr), .in_pop(ib_pop),
    .dma_busy, .dec_busy, .cmp_busy, .mv_busy,
    .cfg_load, .fixed_mask, .cfg_k, .double_vrf, .prec, .tile_base, .sb_base,
    .dma_start, .dma_op, .dma_dram_addr, .dma_buf_addr, .dma_len,
    .cal_start, .cal_nrows, .cmp_start, .cmp_row, .cmp_psum, .cmp_psum_addr, .cmp_dest,
    .fix_start, .dyn_start, .dyn_row, .dyn_psum, .psum_addr,
    .issue_stall
  );

  dma u_dma (
    .clk, .rst_n, .start(dma_start), .op(dma_op), .dram_addr(dma_dram_addr),
    .buf_addr(dma_buf_addr), .len(dma_len),
    .req_valid(m0_valid), .req_ready(m0_ready), .req(m0_req),
    .rsp_valid(m0_rvalid), .rsp_data(bus_rdata),
    .sb_we, .sb_waddr, .sb_wdata,
    .db_en(dba_en), .db_we(dba_we), .db_addr(dba_addr), .db_wdata(dba_wdata), .db_rdata(dba_rdata),
    .busy(dma_busy)
  );

  sparse_buffer u_sb (
    .clk, .we(sb_we), .waddr(sb_waddr), .wdata(sb_wdata),
    .re(sb_re), .raddr(sb_raddr), .rdata(sb_rdata)
  );

  // Dense Buffer port B: CMP result write first, VRF move read otherwise.
  assign mv_gnt   = !vx_we;
  assign dbb_en   = vx_we || mv_req;
  assign dbb_we   = vx_we;
  assign dbb_addr = vx_we ? vx_waddr : mv_addr;

  dense_buffer u_db (
    .clk,
    .a_en(dba_en), .a_we(dba_we), .a_addr(dba_addr), .a_wdata(dba_wdata), .a_rdata(dba_rdata),
    .b_en(dbb_en), .b_we(dbb_we), .b_addr(dbb_addr), .b_wdata(vx_wdata), .b_rdata(dbb_rdata)
  );

  vrf u_vrf (
    .clk, .rst_n, .clear_all(cfg_load),
    .we(vrf_we), .wslot(vrf_wslot), .wdata(vrf_wdata), .wtag(vrf_wtag),
    .wlock(vrf_wlock), .wgrp(vrf_wgrp),
    .rel_en(vrf_rel_en), .rel_grp(vrf_rel_grp),
    .inv_en(vrf_inv_en), .inv_tag(vrf_inv_tag),
    .l_tag(vrf_ltag), .l_hit(vrf_lhit), .l_slot(vrf_lslot), .l_data(vrf_ldata),
    .locked(vrf_locked)
  );

  vrf_mover u_mv (
    .clk, .rst_n,
    .cfg_load, .cfg_k, .fixed_mask, .tile_base,
    .fix_start, .dyn_start, .dyn_row, .dyn_psum, .psum_addr,
    .rib_raddr, .rib_rdata,
    .db_req(mv_req), .db_addr(mv_addr), .db_gnt(mv_gnt), .db_rdata(dbb_rdata),
    .cmp_busy, .cmp_dest(cmp_dest_o),
    .vrf_locked, .vrf_we, .vrf_wslot, .vrf_wdata, .vrf_wtag, .vrf_wlock, .vrf_wgrp,
    .busy(mv_busy), .stall_lock, .stall_psum, .stall_port
  );

  vex u_vex (
    .clk, .rst_n,
    .cfg_load, .prec, .fixed_mask, .tile_base, .sb_base,
    .cal_start, .cal_nrows,
    .cmp_start, .cmp_row, .cmp_psum, .cmp_psum_addr, .cmp_dest,
    .sb_re, .sb_raddr, .sb_rdata,
    .rib_raddr, .rib_rdata,
    .vrf_ltag, .vrf_lhit, .vrf_ldata,
    .vrf_rel_en, .vrf_rel_grp, .vrf_inv_en, .vrf_inv_tag,
    .db_we(vx_we), .db_waddr(vx_waddr), .db_wdata(vx_wdata),
    .dec_busy, .cmp_busy, .cmp_dest_o, .mac_fire, .vrf_miss
  );

  // performance counters
  logic [SW:0] k_r;
  logic        running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf    <= '0;
      k_r     <= '0;
      running <= 1'b0;
    end else if (start) begin
      perf    <= '0;
      running <= 1'b1;
    end else begin
      if (done) running <= 1'b0;
      if (cfg_load) k_r <= cfg_k;
      if (running) perf.cycles <= perf.cycles + 1;
      if (issue_stall) perf.issue_stalls <= perf.issue_stalls + 1;
      if (mac_fire) perf.mac_cycles <= perf.mac_cycles + 1;
      if (mac_fire && vrf_lhit && 32'(vrf_lslot) < 32'(k_r)) perf.fixed_hits <= perf.fixed_hits + 1;
      if (stall_lock) perf.lock_stalls <= perf.lock_stalls + 1;
      if (stall_psum) perf.psum_stalls <= perf.psum_stalls + 1;
      if (stall_port) perf.port_stalls <= perf.port_stalls + 1;
      if (mv_busy && cmp_busy && double_vrf) perf.overlap <= perf.overlap + 1;
    end
  end

endmodule

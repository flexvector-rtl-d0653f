// vrf_mover: the data movement module between the Dense Buffer and the VRF.
//
// It executes the two move instructions of the coarse-grained ISA:
//   MV_Fixed (fix_start): copy every dense row c of the current tile whose
//     bit is set in the Config fixed mask into VRF rows 0, 1, ... k-1, in
//     increasing c. These rows stay for the whole tile.
//   MV_Dyn (dyn_start): copy the dense rows listed in the row index buffer
//     entry of sparse row dyn_row (its misses), then optionally the
//     partial-sum row at psum_addr, into the dynamic region [k, DEPTH).
// The dynamic region is used as a ring (pointer reset to k by Config): the
// misses of two consecutive sparse rows sit side by side, which is exactly
// the condition k + miss(i) + miss(i+1) <= DEPTH that the fixed-region
// selection uses for double-VRF mode. Rows written by MV_Dyn are locked in
// the VRF under a group bit that alternates per MV_Dyn; the mover stalls
// rather than overwrite a locked row, and the VEX unlocks a group when its
// CMP ends. That makes MV_Dyn of row i+1 safe to run during CMP of row i.
// Reading a partial-sum row also stalls while a CMP that will write that
// very Dense Buffer row is in progress (read-after-write interlock).
//
// Timing: one row per cycle when the Dense Buffer port is granted; the VRF
// write happens one cycle after the read (synchronous buffer read). `busy`
// stays high until the last VRF write. Stall outputs are one-cycle
// indications for performance counting. The fixed/dynamic split, MV_Fixed and
// MV_Dyn come from the design; the ring, locks and interlocks are this
// implementation's way of realising them.
module vrf_mover
  import fv_pkg::*;
#(
  parameter int unsigned DEPTH  = VRF_DEPTH,
  parameter int unsigned TN     = TILE,
  parameter int unsigned RDEPTH = RIB_DEPTH,
  parameter int unsigned DBR    = DB_ROWS,
  parameter int unsigned W      = VLEN,
  localparam int unsigned SW    = $clog2(DEPTH),
  localparam int unsigned RAW   = $clog2(RDEPTH),
  localparam int unsigned DAW   = $clog2(DBR),
  localparam int unsigned CW    = $clog2(TN)
) (
  input  logic             clk,
  input  logic             rst_n,
  // Config state
  input  logic             cfg_load,
  input  logic [SW:0]      cfg_k,
  input  logic [TN-1:0]    fixed_mask,
  input  logic [DAW-1:0]   tile_base,
  // commands
  input  logic             fix_start,
  input  logic             dyn_start,
  input  logic [RAW-1:0]   dyn_row,
  input  logic             dyn_psum,
  input  logic [DAW-1:0]   psum_addr,
  // row index buffer
  output logic [RAW-1:0]   rib_raddr,
  input  logic [TN-1:0]    rib_rdata,
  // Dense Buffer read (shared port, granted by the top)
  output logic             db_req,
  output logic [DAW-1:0]   db_addr,
  input  logic             db_gnt,
  input  logic [W-1:0]     db_rdata,
  // CMP in progress (read-after-write interlock for partial sums)
  input  logic             cmp_busy,
  input  logic [DAW-1:0]   cmp_dest,
  // VRF write port
  input  logic [DEPTH-1:0] vrf_locked,
  output logic             vrf_we,
  output logic [SW-1:0]    vrf_wslot,
  output logic [W-1:0]     vrf_wdata,
  output logic [DAW-1:0]   vrf_wtag,
  output logic             vrf_wlock,
  output logic             vrf_wgrp,
  // status
  output logic             busy,
  output logic             stall_lock,
  output logic             stall_psum,
  output logic             stall_port
);

  typedef enum logic [1:0] { M_IDLE, M_FIX, M_DYN } mode_e;

  mode_e          mode;
  logic [TN-1:0]  pend;       // dense rows still to move
  logic           psum_pend;
  logic [DAW-1:0] psum_a;
  logic [SW-1:0]  fslot;      // next fixed-region row
  logic [SW-1:0]  ring;       // next dynamic-region row
  logic [SW-1:0]  ring_nxt;
  logic           grp;        // group of the next MV_Dyn
  logic           cur_grp;    // group of the running MV_Dyn
  logic [SW:0]    k_r;

  // write stage
  logic           wv;
  logic [SW-1:0]  ws;
  logic [DAW-1:0] wt;
  logic           wl;

  logic [CW-1:0]  c;
  logic           want, ring_busy, blk_lock, blk_psum, issue;
  logic [SW-1:0]  slot;

  assign rib_raddr = dyn_row;

  always_comb begin
    c = '0;
    for (int i = TN - 1; i >= 0; i--) if (pend[i]) c = CW'(i);
  end

  assign ring_nxt  = (32'(ring) == DEPTH - 1) ? k_r[SW-1:0] : ring + 1'b1;
  assign ring_busy = vrf_locked[ring] || (wv && ws == ring);
  assign want      = (mode != M_IDLE) && (pend != '0 || (mode == M_DYN && psum_pend));
  assign blk_lock  = (mode == M_DYN) && ring_busy;
  assign blk_psum  = (mode == M_DYN) && (pend == '0) && cmp_busy && (cmp_dest == psum_a);
  assign db_req    = want && !blk_lock && !blk_psum;
  assign db_addr   = (pend != '0) ? tile_base + DAW'(c) : psum_a;
  assign issue     = db_req && db_gnt;
  assign slot      = (mode == M_FIX) ? fslot : ring;

  assign stall_lock = want && blk_lock;
  assign stall_psum = want && !blk_lock && blk_psum;
  assign stall_port = db_req && !db_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode      <= M_IDLE;
      pend      <= '0;
      psum_pend <= 1'b0;
      psum_a    <= '0;
      fslot     <= '0;
      ring      <= '0;
      grp       <= 1'b0;
      cur_grp   <= 1'b0;
      k_r       <= '0;
      wv        <= 1'b0;
      ws        <= '0;
      wt        <= '0;
      wl        <= 1'b0;
    end else begin
      wv <= issue;
      ws <= slot;
      wt <= db_addr;
      wl <= (mode == M_DYN);
      if (cfg_load) begin
        k_r  <= cfg_k;
        ring <= cfg_k[SW-1:0];
        grp  <= 1'b0;
      end
      case (mode)
        M_IDLE: begin
          if (fix_start) begin
            mode  <= M_FIX;
            pend  <= fixed_mask;
            fslot <= '0;
          end else if (dyn_start) begin
            mode      <= M_DYN;
            pend      <= rib_rdata;
            psum_pend <= dyn_psum;
            psum_a    <= psum_addr;
            cur_grp   <= grp;
            grp       <= ~grp;
          end
        end
        default: begin
          if (issue) begin
            if (pend != '0) pend[c] <= 1'b0;
            else psum_pend <= 1'b0;
            if (mode == M_FIX) fslot <= fslot + 1'b1;
            else ring <= ring_nxt;
          end
          if (!want) mode <= M_IDLE;
        end
      endcase
    end
  end

  assign vrf_we    = wv;
  assign vrf_wslot = ws;
  assign vrf_wdata = db_rdata;
  assign vrf_wtag  = wt;
  assign vrf_wlock = wl;
  assign vrf_wgrp  = cur_grp;
  assign busy      = (mode != M_IDLE) || wv;

  // The dynamic region must exist when MV_Dyn has rows to move.
  a_dyn_region: assert property (@(posedge clk) disable iff (!rst_n)
    (mode == M_DYN && want) |-> (32'(k_r) < DEPTH));

endmodule

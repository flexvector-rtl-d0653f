// vrf: the flexible vector register file.
//
// DEPTH full-width rows (VLEN bits each). Rows [0, k) form the fixed region,
// holding high-reuse dense rows for a whole tile; rows [k, DEPTH) form the
// dynamic region, refilled for each sparse row. The boundary k is not stored
// here: the data mover decides which row to write. Every row carries a tag,
// the Dense Buffer address of the row it holds, so that the lanes find a
// dense row by associative lookup (cache-like access, one full row per
// cycle, no banking). Each row also has a lock bit with a one-bit group id:
// rows written for the sparse row that is being or will next be computed are
// locked, and the mover must not overwrite a locked row; when a CMP finishes
// it releases its group. This is what lets MV_Dyn of the next row overlap CMP
// of the current row (double-VRF mode).
//
// Operations (all synchronous, one per kind per cycle):
//   clear_all        invalidate every row and drop every lock (Config);
//   we               write data, tag, lock and group into row wslot;
//   rel_en           unlock the rows whose group is rel_grp;
//   inv_en           invalidate the rows whose tag is inv_tag (the Dense
//                    Buffer row was just rewritten);
// Lookup is combinational: l_hit/l_slot/l_data for tag l_tag, lowest row
// wins when a row is held twice (both copies then hold the same data).
// Tags, locks and groups are this implementation's choice; the fixed and
// dynamic regions and the full-row access come from the design.
module vrf
  import fv_pkg::*;
#(
  parameter int unsigned DEPTH = VRF_DEPTH,
  parameter int unsigned W     = VLEN,
  parameter int unsigned TW    = DB_AW,
  localparam int unsigned SW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_all,
  input  logic             we,
  input  logic [SW-1:0]    wslot,
  input  logic [W-1:0]     wdata,
  input  logic [TW-1:0]    wtag,
  input  logic             wlock,
  input  logic             wgrp,
  input  logic             rel_en,
  input  logic             rel_grp,
  input  logic             inv_en,
  input  logic [TW-1:0]    inv_tag,
  input  logic [TW-1:0]    l_tag,
  output logic             l_hit,
  output logic [SW-1:0]    l_slot,
  output logic [W-1:0]     l_data,
  output logic [DEPTH-1:0] locked
);

  logic [W-1:0]     data  [DEPTH];
  logic [TW-1:0]    tag   [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [DEPTH-1:0] grp;

  always_ff @(posedge clk) begin
    if (we) begin
      data[wslot] <= wdata;
      tag[wslot]  <= wtag;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      locked <= '0;
      grp    <= '0;
    end else if (clear_all) begin
      valid  <= '0;
      locked <= '0;
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (inv_en && valid[i] && tag[i] == inv_tag) valid[i] <= 1'b0;
        if (rel_en && locked[i] && grp[i] == rel_grp) locked[i] <= 1'b0;
        if (we && wslot == SW'(i)) begin
          valid[i]  <= 1'b1;
          locked[i] <= wlock;
          grp[i]    <= wgrp;
        end
      end
    end
  end

  always_comb begin
    l_hit  = 1'b0;
    l_slot = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (valid[i] && tag[i] == l_tag) begin
        l_hit  = 1'b1;
        l_slot = SW'(i);
      end
    end
  end

  assign l_data = data[l_slot];

endmodule

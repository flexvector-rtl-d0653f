// vex: the Vector Execution Unit.
//
// Holds the CSR decoder, the row index buffer, the unpack network, NLANES
// MAC lanes and the pack network, and sequences the CMP instruction:
//   1. cmp_start clears the lane accumulators and starts the decoder on the
//      sparse row;
//   2. for every nonzero (one per cycle) the dense row with that column index
//      is looked up in the VRF by its Dense Buffer address (tile_base + col),
//      unpacked, and multiplied by the broadcast scalar in every lane;
//   3. at the decoder's row-done flag, if cmp_psum is set, one more cycle adds
//      the partial-sum row (VRF tag cmp_psum_addr) through the lanes with the
//      multiplicand forced to 1;
//   4. the packed result row is written to the Dense Buffer at cmp_dest (this
//      write has priority on the shared port), VRF copies of that Dense Buffer
//      row are invalidated, and the VRF rows locked for this CMP's group are
//      released.
// CMP occupies the unit for nnz + 4 cycles (nnz + 5 with a partial sum).
// A lookup that misses the VRF is a program error: the element is taken as
// zero and the sticky vrf_miss flag is raised.
// CAL_IDX is passed to the decoder (cal_start). The unit structure follows
// the design; the cycle-level sequence is this implementation's.
module vex
  import fv_pkg::*;
#(
  parameter int unsigned NL     = NLANES,
  parameter int unsigned SW     = SUBW,
  parameter int unsigned TN     = TILE,
  parameter int unsigned RDEPTH = RIB_DEPTH,
  parameter int unsigned SBW    = SB_WORDS,
  parameter int unsigned DBR    = DB_ROWS,
  localparam int unsigned W     = NL * SW * 8,
  localparam int unsigned RAW   = $clog2(RDEPTH),
  localparam int unsigned SAW   = $clog2(SBW),
  localparam int unsigned DAW   = $clog2(DBR),
  localparam int unsigned CW    = $clog2(TN)
) (
  input  logic            clk,
  input  logic            rst_n,
  // Config state
  input  logic            cfg_load,
  input  prec_e           prec,
  input  logic [TN-1:0]   fixed_mask,
  input  logic [DAW-1:0]  tile_base,
  input  logic [SAW-1:0]  sb_base,
  // commands
  input  logic            cal_start,
  input  logic [RAW:0]    cal_nrows,
  input  logic            cmp_start,
  input  logic [RAW-1:0]  cmp_row,
  input  logic            cmp_psum,
  input  logic [DAW-1:0]  cmp_psum_addr,
  input  logic [DAW-1:0]  cmp_dest,
  // Sparse Buffer read port
  output logic            sb_re,
  output logic [SAW-1:0]  sb_raddr,
  input  logic [31:0]     sb_rdata,
  // row index buffer read port (for the data mover)
  input  logic [RAW-1:0]  rib_raddr,
  output logic [TN-1:0]   rib_rdata,
  // VRF lookup and maintenance
  output logic [DAW-1:0]  vrf_ltag,
  input  logic            vrf_lhit,
  input  logic [W-1:0]    vrf_ldata,
  output logic            vrf_rel_en,
  output logic            vrf_rel_grp,
  output logic            vrf_inv_en,
  output logic [DAW-1:0]  vrf_inv_tag,
  // Dense Buffer result write
  output logic            db_we,
  output logic [DAW-1:0]  db_waddr,
  output logic [W-1:0]    db_wdata,
  // status
  output logic            dec_busy,
  output logic            cmp_busy,
  output logic [DAW-1:0]  cmp_dest_o,
  output logic            mac_fire,
  output logic            vrf_miss
);

  typedef enum logic [1:0] { C_IDLE, C_RUN, C_PSUM, C_WB } cstate_e;

  cstate_e        cst;
  logic           grp;
  logic           psum_r;
  logic [DAW-1:0] psum_a, dest_r;

  logic           rib_we;
  logic [RAW-1:0] rib_waddr;
  logic [TN-1:0]  rib_wdata;
  logic           d_valid, d_last;
  logic [31:0]    d_scalar;
  logic [CW-1:0]  d_col;

  logic [NL-1:0][SW-1:0][31:0] opnd;
  logic [NL-1:0][SW-1:0][31:0] acc;
  logic           lane_clr, lane_en, lane_one;
  logic [W-1:0]   row_in, row_out;

  csr_decoder #(.TN(TN), .RDEPTH(RDEPTH), .SBW(SBW)) u_dec (
    .clk, .rst_n,
    .cal_start, .cal_nrows,
    .cmp_start(cmp_start && cst == C_IDLE), .cmp_row,
    .sb_base, .fixed_mask,
    .sb_re, .sb_raddr, .sb_rdata,
    .rib_we, .rib_waddr, .rib_wdata,
    .out_valid(d_valid), .out_scalar(d_scalar), .out_col(d_col), .out_last(d_last),
    .busy(dec_busy)
  );

  row_index_buffer #(.DEPTH(RDEPTH), .W(TN)) u_rib (
    .clk, .we(rib_we), .waddr(rib_waddr), .wdata(rib_wdata),
    .raddr(rib_raddr), .rdata(rib_rdata)
  );

  assign vrf_ltag = (cst == C_PSUM) ? psum_a : tile_base + DAW'(d_col);
  assign row_in   = vrf_lhit ? vrf_ldata : '0;

  vec_unpack #(.NL(NL), .SW(SW)) u_unpack (.prec, .row(row_in), .opnd);

  assign lane_clr = (cst == C_IDLE) && cmp_start;
  assign lane_en  = (cst == C_RUN && d_valid) || (cst == C_PSUM);
  assign lane_one = (cst == C_PSUM);
  assign mac_fire = lane_en;

  for (genvar l = 0; l < NL; l++) begin : g_lane
    vector_lane #(.SW(SW)) u_lane (
      .clk, .rst_n, .clr(lane_clr), .en(lane_en), .prec, .sel_one(lane_one),
      .scalar(d_scalar), .opnd(opnd[l]), .acc(acc[l])
    );
  end

  vec_pack #(.NL(NL), .SW(SW)) u_pack (.prec, .acc, .row(row_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst      <= C_IDLE;
      grp      <= 1'b0;
      psum_r   <= 1'b0;
      psum_a   <= '0;
      dest_r   <= '0;
      vrf_miss <= 1'b0;
    end else begin
      if (cfg_load) grp <= 1'b0;
      if (lane_en && !vrf_lhit) vrf_miss <= 1'b1;
      case (cst)
        C_IDLE: if (cmp_start) begin
          cst    <= C_RUN;
          psum_r <= cmp_psum;
          psum_a <= cmp_psum_addr;
          dest_r <= cmp_dest;
        end
        C_RUN:  if (d_last) cst <= psum_r ? C_PSUM : C_WB;
        C_PSUM: cst <= C_WB;
        C_WB: begin
          cst <= C_IDLE;
          grp <= ~grp;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

  assign db_we       = (cst == C_WB);
  assign db_waddr    = dest_r;
  assign db_wdata    = row_out;
  assign vrf_inv_en  = (cst == C_WB);
  assign vrf_inv_tag = dest_r;
  assign vrf_rel_en  = (cst == C_WB);
  assign vrf_rel_grp = grp;
  assign cmp_busy    = (cst != C_IDLE);
  assign cmp_dest_o  = dest_r;

endmodule

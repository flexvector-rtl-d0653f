// controller: the controller with the Vector Instruction Decoder (VID).
//
// After `start` it takes instructions in order from the instruction buffer,
// decodes them and issues at most one per cycle to the unit that executes
// it: DMA (LD_S, LD_D, ST_D), CSR decoder (CAL_IDX), data mover (MV_Fixed,
// MV_Dyn) or lanes (CMP). It also holds the Config state of the current tile:
// fixed-row mask (its population count k, the size of the VRF fixed region,
// is output as cfg_k together with the cfg_load pulse),
// single/double-VRF mode, precision, Dense Buffer sub-buffer (tile base =
// index x TILE) and Sparse Buffer tile base. Config also clears the VRF.
//
// An instruction waits until its unit is free and these interlocks hold:
//   CONFIG, MV_FIXED   mover, decoder and lanes idle;
//   CAL_IDX            decoder and lanes idle;
//   MV_DYN             mover idle and, in single-VRF mode, no CMP running
//                      (double-VRF mode lets it overlap the running CMP);
//   CMP                mover, decoder and lanes idle (its rows are in place);
//   HALT               every unit idle; then `done` rises.
// The two wait bits of the instruction word add a wait for the DMA and/or
// for all vector units; software uses them to order transfers against
// computation, which lets loads of the next tile overlap computation of the
// current one. issue_stall marks cycles where a valid instruction waits.
// The instruction set and single/double-VRF behaviour come from the design;
// the interlock rules are this implementation's.
module controller
  import fv_pkg::*;
#(
  parameter int unsigned TN     = TILE,
  parameter int unsigned DEPTH  = VRF_DEPTH,
  parameter int unsigned RDEPTH = RIB_DEPTH,
  parameter int unsigned DBR    = DB_ROWS,
  parameter int unsigned SBW    = SB_WORDS,
  localparam int unsigned SW    = $clog2(DEPTH),
  localparam int unsigned RAW   = $clog2(RDEPTH),
  localparam int unsigned DAW   = $clog2(DBR),
  localparam int unsigned SAW   = $clog2(SBW)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               done,
  // instruction stream
  input  logic               in_valid,
  input  instr_t             in_instr,
  output logic               in_pop,
  // unit status
  input  logic               dma_busy,
  input  logic               dec_busy,
  input  logic               cmp_busy,
  input  logic               mv_busy,
  // Config state
  output logic               cfg_load,
  output logic [TN-1:0]      fixed_mask,
  output logic [SW:0]        cfg_k,
  output logic               double_vrf,
  output prec_e              prec,
  output logic [DAW-1:0]     tile_base,
  output logic [SAW-1:0]     sb_base,
  // DMA
  output logic               dma_start,
  output dma_op_e            dma_op,
  output logic [DRAM_AW-1:0] dma_dram_addr,
  output logic [7:0]         dma_buf_addr,
  output logic [15:0]        dma_len,
  // VEX
  output logic               cal_start,
  output logic [RAW:0]       cal_nrows,
  output logic               cmp_start,
  output logic [RAW-1:0]     cmp_row,
  output logic               cmp_psum,
  output logic [DAW-1:0]     cmp_psum_addr,
  output logic [DAW-1:0]     cmp_dest,
  // data mover
  output logic               fix_start,
  output logic               dyn_start,
  output logic [RAW-1:0]     dyn_row,
  output logic               dyn_psum,
  output logic [DAW-1:0]     psum_addr,
  // performance
  output logic               issue_stall
);

  logic   running;
  instr_t i;
  logic   vec_idle, ok_wait, ok_unit, issue;

  assign i        = in_instr;
  assign vec_idle = !dec_busy && !cmp_busy && !mv_busy;
  assign ok_wait  = (!i.wait_dma || !dma_busy) && (!i.wait_vex || vec_idle);

  always_comb begin
    unique case (i.op)
      OP_CONFIG, OP_MV_FIXED:      ok_unit = vec_idle;
      OP_LD_S, OP_LD_D, OP_ST_D:   ok_unit = !dma_busy;
      OP_CAL_IDX:                  ok_unit = !dec_busy && !cmp_busy;
      OP_MV_DYN:                   ok_unit = !mv_busy && (double_vrf || !cmp_busy);
      OP_CMP:                      ok_unit = vec_idle;
      OP_HALT:                     ok_unit = vec_idle && !dma_busy;
      default:                     ok_unit = 1'b1;
    endcase
  end

  assign issue       = running && in_valid && ok_wait && ok_unit;
  assign in_pop      = issue;
  assign issue_stall = running && in_valid && !issue;

  // decoded command fields
  assign dma_op        = (i.op == OP_LD_S) ? DMA_LD_S : (i.op == OP_LD_D) ? DMA_LD_D : DMA_ST_D;
  assign dma_dram_addr = i.a;
  assign dma_buf_addr  = i.b[7:0];
  assign dma_len       = i.c;
  assign cal_nrows     = i.c[RAW:0];
  assign cmp_row       = i.c[RAW-1:0];
  assign cmp_psum      = i.flags[0];
  assign cmp_psum_addr = i.a[DAW-1:0];
  assign cmp_dest      = i.b[DAW-1:0];
  assign dyn_row       = i.c[RAW-1:0];
  assign dyn_psum      = i.flags[0];
  assign psum_addr     = i.a[DAW-1:0];

  assign dma_start = issue && (i.op == OP_LD_S || i.op == OP_LD_D || i.op == OP_ST_D);
  assign cal_start = issue && (i.op == OP_CAL_IDX);
  assign cmp_start = issue && (i.op == OP_CMP);
  assign fix_start = issue && (i.op == OP_MV_FIXED);
  assign dyn_start = issue && (i.op == OP_MV_DYN);
  assign cfg_load  = issue && (i.op == OP_CONFIG);
  // k of the Config being issued, valid together with cfg_load
  assign cfg_k     = (SW+1)'($countones(i.a[TN-1:0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      done       <= 1'b0;
      fixed_mask <= '0;
      double_vrf <= 1'b0;
      prec       <= PREC_INT8;
      tile_base  <= '0;
      sb_base    <= '0;
    end else begin
      if (start) begin
        running <= 1'b1;
        done    <= 1'b0;
      end else if (issue && i.op == OP_HALT) begin
        running <= 1'b0;
        done    <= 1'b1;
      end
      if (cfg_load) begin
        fixed_mask <= i.a[TN-1:0];
        double_vrf <= i.b[0];
        prec       <= prec_e'(i.b[1]);
        tile_base  <= DAW'(32'(i.b[4:2]) * TN);
        sb_base    <= i.c[SAW-1:0];
      end
    end
  end

endmodule

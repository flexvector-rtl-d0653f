// fv_pkg: constants, instruction format and shared types of the FlexVector
// sparse-dense matrix multiply (SpMM) vector processor.
//
// Sizes follow the default configuration described for the design: a 128-bit
// vector register (VRF) row holding sixteen 8-bit or four 32-bit elements, a
// VRF depth of 6x2 = 12 rows, a 2 KB Dense Buffer (128 rows of 128 bits) with
// six tile sub-buffers for the rows-to-compute region, a 256 B Sparse Buffer
// and 16x16 tiles. The 64-bit instruction encoding and the HALT/NOP opcodes are
// this implementation's own choice; only the instruction names and meanings
// (Config, LD_S, LD_D, CAL_IDX, MV_Fixed, MV_Dyn, CMP, ST_D) come from the
// design description.
//
// Instruction word (64 bits, MSB first):
//   op[63:60] wait_dma[59] wait_vex[58] flags[57:54] a[53:30] b[29:16] c[15:0]
// Field use per opcode:
//   CONFIG   a[15:0] fixed-row mask of the tile, b[0] double-VRF, b[1] INT32,
//            b[4:2] dense sub-buffer index, c[7:0] sparse tile base word
//   LD_S     a DRAM beat address, b[7:0] sparse word address (multiple of 4), c beats
//   LD_D     a DRAM beat address, b[7:0] dense row address, c rows
//   ST_D     a DRAM beat address, b[7:0] dense row address, c rows
//   CAL_IDX  c number of sparse rows in the tile
//   MV_FIXED (no operands; uses the CONFIG mask)
//   MV_DYN   c sparse row, flags[0] also load partial-sum row a[7:0]
//   CMP      c sparse row, b[7:0] destination dense row, flags[0] add
//            partial-sum row a[7:0] before writing
package fv_pkg;

  localparam int unsigned VLEN      = 128;          // VRF row width (bits)
  localparam int unsigned LANE_W    = 32;           // base lane width (bits)
  localparam int unsigned NLANES    = VLEN / LANE_W; // 4 lanes
  localparam int unsigned SUBW      = LANE_W / 8;   // 8-bit elements per lane
  localparam int unsigned VRF_DEPTH = 12;           // 6 x 2
  localparam int unsigned TILE      = 16;           // tile edge (rows/cols)
  localparam int unsigned DB_ROWS   = 128;          // 2 KB / 16 B
  localparam int unsigned M_BUF     = 6;            // rows-to-compute sub-buffers
  localparam int unsigned SB_WORDS  = 64;           // 256 B / 4 B
  localparam int unsigned RIB_DEPTH = 32;           // sparse rows per tile after vertex-cut
  localparam int unsigned IB_DEPTH  = 16;           // instruction FIFO entries
  localparam int unsigned DRAM_AW   = 24;           // DRAM beat address bits
  localparam int unsigned DB_AW     = $clog2(DB_ROWS);
  localparam int unsigned SB_AW     = $clog2(SB_WORDS);
  localparam int unsigned COL_W     = $clog2(TILE);
  localparam int unsigned SLOT_W    = $clog2(VRF_DEPTH);

  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_CONFIG   = 4'd1,
    OP_LD_S     = 4'd2,
    OP_LD_D     = 4'd3,
    OP_CAL_IDX  = 4'd4,
    OP_MV_FIXED = 4'd5,
    OP_MV_DYN   = 4'd6,
    OP_CMP      = 4'd7,
    OP_ST_D     = 4'd8,
    OP_HALT     = 4'd15
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic        wait_dma;
    logic        wait_vex;
    logic [3:0]  flags;
    logic [23:0] a;
    logic [13:0] b;
    logic [15:0] c;
  } instr_t;

  typedef enum logic { PREC_INT8 = 1'b0, PREC_INT32 = 1'b1 } prec_e;

  typedef enum logic [1:0] { DMA_LD_S = 2'd0, DMA_LD_D = 2'd1, DMA_ST_D = 2'd2 } dma_op_e;

  // One request on the 128-bit memory bus.
  typedef struct packed {
    logic               we;
    logic [DRAM_AW-1:0] addr;
    logic [VLEN-1:0]    wdata;
  } bus_req_t;

  // Sparse Buffer word: {column index, signed value}.
  typedef struct packed {
    logic [7:0]  col;
    logic [23:0] val;
  } sp_word_t;

  // Performance counters of the top level.
  typedef struct packed {
    logic [31:0] cycles;        // cycles while running
    logic [31:0] issue_stalls;  // a decoded instruction waited for a unit
    logic [31:0] mac_cycles;    // lane multiply-accumulate cycles
    logic [31:0] fixed_hits;    // MACs whose dense row came from the fixed region
    logic [31:0] lock_stalls;   // MV_Dyn waited for a locked VRF row
    logic [31:0] psum_stalls;   // MV_Dyn waited for a CMP to write its psum row
    logic [31:0] port_stalls;   // VRF move lost the Dense Buffer port to a CMP write
    logic [31:0] overlap;       // MV_Dyn and CMP active in the same cycle
  } perf_t;

endpackage

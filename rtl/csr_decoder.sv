// csr_decoder: the CSR decoder of the vector execution unit.
//
// A sparse tile sits in the Sparse Buffer at word address sb_base as
//   nrows+1 row pointers (word i, low 8 bits = offset of row i's first
//   nonzero), followed by the nonzeros, one word each: {col[7:0], value[23:0]}.
// The decoder reads the pointers into its Pointers registers, then streams
// nonzeros one per cycle; an internal counter compares the nonzero index with
// the next row pointer and raises a row-done flag (the END token) when a row
// is exhausted. This follows the decoder's data path (demultiplexed Data,
// Indices and Pointers, one-hot generator, counter, flag); the word layout is
// this design's choice.
//
// Two commands, accepted only while `busy` is low:
//   cal_start (CAL_IDX): read the pointers of cal_nrows rows, then walk every
//     nonzero of every row, OR-ing one-hot(col) into a bitmap; at each row end
//     write bitmap & ~fixed_mask to the row index buffer (entry = row).
//     Takes about 2*nrows + nnz + 4 cycles.
//   cmp_start (CMP part): stream the nonzeros of row cmp_row, one per cycle,
//     as out_valid/out_scalar (sign-extended to 32 bits)/out_col, then one
//     cycle of out_last. The first nonzero appears 2 cycles after cmp_start.
// Pointers are kept until the next cal_start, so any row of the tile can be
// computed in any order.
module csr_decoder
  import fv_pkg::*;
#(
  parameter int unsigned TN     = TILE,
  parameter int unsigned RDEPTH = RIB_DEPTH,
  parameter int unsigned SBW    = SB_WORDS,
  localparam int unsigned RAW   = $clog2(RDEPTH),
  localparam int unsigned SAW   = $clog2(SBW),
  localparam int unsigned CW    = $clog2(TN)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cal_start,
  input  logic [RAW:0]     cal_nrows,
  input  logic             cmp_start,
  input  logic [RAW-1:0]   cmp_row,
  input  logic [SAW-1:0]   sb_base,
  input  logic [TN-1:0]    fixed_mask,
  output logic             sb_re,
  output logic [SAW-1:0]   sb_raddr,
  input  logic [31:0]      sb_rdata,
  output logic             rib_we,
  output logic [RAW-1:0]   rib_waddr,
  output logic [TN-1:0]    rib_wdata,
  output logic             out_valid,
  output logic [31:0]      out_scalar,
  output logic [CW-1:0]    out_col,
  output logic             out_last,
  output logic             busy
);

  typedef enum logic [2:0] { S_IDLE, S_PTR, S_WAIT, S_ROW, S_DRAIN } state_e;
  typedef enum logic [1:0] { T_PTR, T_NNZ, T_END } tok_e;

  state_e         state;
  logic           is_cal;          // current command is CAL_IDX
  logic [RAW:0]   nrows;
  logic [RAW:0]   pidx;            // pointer being read
  logic [RAW:0]   row;             // row being walked
  logic [7:0]     j;               // nonzero counter
  logic [7:0]     ptr [RDEPTH+1];  // Pointers registers
  logic [TN-1:0]  bitmap;

  // issue-stage token
  logic           iss_v;
  tok_e           iss_k;
  // data-stage token (aligned with sb_rdata)
  logic           tok_v;
  tok_e           tok_k;
  logic [RAW:0]   tok_idx;
  logic           tok_cal;

  logic [7:0]     row_end;
  sp_word_t       w;

  assign row_end = ptr[row + 1'b1];
  assign w       = sb_rdata;

  // issue stage
  always_comb begin
    iss_v    = 1'b0;
    iss_k    = T_PTR;
    sb_re    = 1'b0;
    sb_raddr = '0;
    case (state)
      S_PTR: begin
        iss_v    = 1'b1;
        iss_k    = T_PTR;
        sb_re    = 1'b1;
        sb_raddr = sb_base + SAW'(pidx);
      end
      S_ROW: begin
        iss_v = 1'b1;
        if (j < row_end) begin
          iss_k    = T_NNZ;
          sb_re    = 1'b1;
          sb_raddr = sb_base + SAW'(nrows) + SAW'(1) + SAW'(j);
        end else begin
          iss_k = T_END;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      is_cal <= 1'b0;
      nrows  <= '0;
      pidx   <= '0;
      row    <= '0;
      j      <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (cal_start) begin
            state  <= S_PTR;
            is_cal <= 1'b1;
            nrows  <= cal_nrows;
            pidx   <= '0;
          end else if (cmp_start) begin
            state  <= S_ROW;
            is_cal <= 1'b0;
            row    <= {1'b0, cmp_row};
            j      <= ptr[{1'b0, cmp_row}];
          end
        end
        S_PTR: begin
          if (pidx == nrows) state <= S_WAIT;
          else pidx <= pidx + 1'b1;
        end
        S_WAIT: begin
          state <= (nrows == 0) ? S_DRAIN : S_ROW;
          row   <= '0;
          j     <= ptr[0];
        end
        S_ROW: begin
          if (j < row_end) j <= j + 1'b1;
          else begin
            j <= row_end;
            if (!is_cal || row + 1'b1 == nrows) state <= S_DRAIN;
            else row <= row + 1'b1;
          end
        end
        S_DRAIN: if (!tok_v) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // data stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_v   <= 1'b0;
      tok_k   <= T_PTR;
      tok_idx <= '0;
      tok_cal <= 1'b0;
      bitmap  <= '0;
    end else begin
      tok_v   <= iss_v;
      tok_k   <= iss_k;
      tok_idx <= (state == S_PTR) ? pidx : row;
      tok_cal <= is_cal;
      if (tok_v && tok_k == T_PTR) ptr[tok_idx] <= w[7:0];
      if (tok_v && tok_cal && tok_k == T_NNZ) bitmap <= bitmap | (TN'(1) << w.col[CW-1:0]);
      if (tok_v && tok_k == T_END) bitmap <= '0;
    end
  end

  assign rib_we     = tok_v && tok_cal && tok_k == T_END;
  assign rib_waddr  = tok_idx[RAW-1:0];
  assign rib_wdata  = bitmap & ~fixed_mask;
  assign out_valid  = tok_v && !tok_cal && tok_k == T_NNZ;
  assign out_scalar = {{8{w.val[23]}}, w.val};
  assign out_col    = w.col[CW-1:0];
  assign out_last   = tok_v && !tok_cal && tok_k == T_END;
  assign busy       = (state != S_IDLE) || tok_v;

endmodule

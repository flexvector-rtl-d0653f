// dma: direct memory access unit between DRAM and the on-chip buffers.
//
// Executes the three transfer instructions:
//   LD_S  read `len` 128-bit beats from DRAM beat address dram_addr and write
//         each as four 32-bit words into the Sparse Buffer from word address
//         buf_addr (word address advances by 4 per beat);
//   LD_D  read `len` beats into consecutive Dense Buffer rows from buf_addr;
//   ST_D  read `len` Dense Buffer rows from buf_addr and write them to DRAM.
// Loads issue one read request per cycle while the bus accepts them and
// write each response as it returns (responses come back in request order),
// so a load of n beats takes about n + DRAM latency cycles. Stores read one
// row, then hold the write request until the bus accepts it (at least 3
// cycles per row). Writes are posted: no response is expected. Only one
// transfer runs at a time; `start` is taken while `busy` is low. The
// instructions come from the design; the bus protocol and the transfer
// mechanics are this implementation's.
module dma
  import fv_pkg::*;
#(
  parameter int unsigned DBR  = DB_ROWS,
  parameter int unsigned SBW  = SB_WORDS,
  localparam int unsigned DAW = $clog2(DBR),
  localparam int unsigned SAW = $clog2(SBW)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  dma_op_e            op,
  input  logic [DRAM_AW-1:0] dram_addr,
  input  logic [7:0]         buf_addr,
  input  logic [15:0]        len,
  // bus master port
  output logic               req_valid,
  input  logic               req_ready,
  output bus_req_t           req,
  input  logic               rsp_valid,
  input  logic [VLEN-1:0]    rsp_data,
  // Sparse Buffer write port
  output logic               sb_we,
  output logic [SAW-1:0]     sb_waddr,
  output logic [VLEN-1:0]    sb_wdata,
  // Dense Buffer port A
  output logic               db_en,
  output logic               db_we,
  output logic [DAW-1:0]     db_addr,
  output logic [VLEN-1:0]    db_wdata,
  input  logic [VLEN-1:0]    db_rdata,
  output logic               busy
);

  typedef enum logic [2:0] { D_IDLE, D_LOAD, D_RD, D_CAP, D_REQ } dstate_e;

  dstate_e            st;
  dma_op_e            op_r;
  logic [DRAM_AW-1:0] base;
  logic [7:0]         bbase;
  logic [15:0]        n, ic, rc;
  logic [VLEN-1:0]    wbuf;

  always_comb begin
    req_valid = 1'b0;
    req       = '0;
    db_en     = 1'b0;
    db_we     = 1'b0;
    db_addr   = '0;
    db_wdata  = rsp_data;
    sb_we     = 1'b0;
    sb_waddr  = SAW'(bbase) + SAW'({rc, 2'b00});
    sb_wdata  = rsp_data;
    case (st)
      D_LOAD: begin
        req_valid = (ic < n);
        req.we    = 1'b0;
        req.addr  = base + DRAM_AW'(ic);
        if (rsp_valid) begin
          if (op_r == DMA_LD_S) sb_we = 1'b1;
          else begin
            db_en   = 1'b1;
            db_we   = 1'b1;
            db_addr = DAW'(bbase) + DAW'(rc);
          end
        end
      end
      D_RD: begin
        db_en   = 1'b1;
        db_addr = DAW'(bbase) + DAW'(ic);
      end
      D_REQ: begin
        req_valid = 1'b1;
        req.we    = 1'b1;
        req.addr  = base + DRAM_AW'(ic);
        req.wdata = wbuf;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= D_IDLE;
      op_r  <= DMA_LD_S;
      base  <= '0;
      bbase <= '0;
      n     <= '0;
      ic    <= '0;
      rc    <= '0;
      wbuf  <= '0;
    end else begin
      case (st)
        D_IDLE: if (start) begin
          op_r  <= op;
          base  <= dram_addr;
          bbase <= buf_addr;
          n     <= len;
          ic    <= '0;
          rc    <= '0;
          if (len == 0) st <= D_IDLE;
          else st <= (op == DMA_ST_D) ? D_RD : D_LOAD;
        end
        D_LOAD: begin
          if (req_valid && req_ready) ic <= ic + 1'b1;
          if (rsp_valid) begin
            rc <= rc + 1'b1;
            if (rc + 1'b1 == n) st <= D_IDLE;
          end
        end
        D_RD:  st <= D_CAP;
        D_CAP: begin
          wbuf <= db_rdata;
          st   <= D_REQ;
        end
        D_REQ: if (req_ready) begin
          ic <= ic + 1'b1;
          st <= (ic + 1'b1 == n) ? D_IDLE : D_RD;
        end
        default: st <= D_IDLE;
      endcase
    end
  end

  assign busy = (st != D_IDLE);

endmodule

// bus_interface: joins the DMA and the instruction fetcher onto the single
// 128-bit DRAM port.
//
// Master 0 is the DMA, master 1 the instruction buffer's prefetcher; the DMA
// has fixed priority. A request passes when the DRAM side is ready and, for
// reads, when the 8-entry response-routing FIFO has room; the FIFO records
// which master issued each read so that in-order read responses are steered
// back to it. Writes are posted (no response). Valid/ready handshakes on
// every request port; responses are a one-cycle valid with data and cannot
// be refused. Arbitration policy and FIFO depth are this implementation's
// choice: the design only names the bus interface.
module bus_interface
  import fv_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // master 0: DMA
  input  logic            m0_valid,
  output logic            m0_ready,
  input  bus_req_t        m0_req,
  output logic            m0_rvalid,
  // master 1: instruction fetch
  input  logic            m1_valid,
  output logic            m1_ready,
  input  bus_req_t        m1_req,
  output logic            m1_rvalid,
  // shared read data
  output logic [VLEN-1:0] rdata,
  // DRAM port
  output logic            d_valid,
  input  logic            d_ready,
  output bus_req_t        d_req,
  input  logic            d_rvalid,
  input  logic [VLEN-1:0] d_rdata
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic [FIFO_DEPTH-1:0] owner;   // 1 = master 1
  logic [PW-1:0]         wp, rp;
  logic [PW:0]           cnt;
  logic                  full, sel1, fire, push, pop;

  assign full  = (cnt == (PW+1)'(FIFO_DEPTH));
  assign sel1  = !m0_valid;
  assign d_req = sel1 ? m1_req : m0_req;
  assign d_valid = sel1 ? (m1_valid && (m1_req.we || !full))
                        : (m0_valid && (m0_req.we || !full));
  assign m0_ready = !sel1 && d_ready && (m0_req.we || !full);
  assign m1_ready =  sel1 && d_ready && (m1_req.we || !full);
  assign fire  = d_valid && d_ready;
  assign push  = fire && !d_req.we;
  assign pop   = d_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      cnt   <= '0;
      owner <= '0;
    end else begin
      if (push) begin
        owner[wp] <= sel1;
        wp        <= wp + 1'b1;
      end
      if (pop) rp <= rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  assign m0_rvalid = d_rvalid && !owner[rp];
  assign m1_rvalid = d_rvalid &&  owner[rp];
  assign rdata     = d_rdata;

  a_no_orphan_rsp: assert property (@(posedge clk) disable iff (!rst_n) d_rvalid |-> cnt != 0);

endmodule

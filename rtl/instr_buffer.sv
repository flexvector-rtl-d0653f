// instr_buffer: the Instruction Buffer with its prefetcher.
//
// On `start` it begins fetching prog_len 64-bit instructions from DRAM beat
// address prog_addr, two per 128-bit beat (bits [63:0] first). Fetched
// instructions enter a DEPTH-entry FIFO that the controller reads in order
// (out_valid/out_instr, `pop` removes the head). The prefetcher issues a
// read only while the FIFO has room for every instruction already requested
// plus the two of the new beat, so responses never overflow it; programs of
// any length stream through. `start` must be given while no fetch is in
// flight. The FIFO form and depth are this implementation's choice; the
// design only places an instruction buffer between the bus interface and
// the controller.
module instr_buffer
  import fv_pkg::*;
#(
  parameter int unsigned DEPTH = IB_DEPTH,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [DRAM_AW-1:0] prog_addr,
  input  logic [15:0]        prog_len,
  output logic               req_valid,
  input  logic               req_ready,
  output bus_req_t           req,
  input  logic               rsp_valid,
  input  logic [VLEN-1:0]    rsp_data,
  output logic               out_valid,
  output instr_t             out_instr,
  input  logic               pop
);

  instr_t             mem [DEPTH];
  logic [PW-1:0]      wp, rp;
  logic [PW:0]        cnt;
  logic [PW:0]        inflight;   // instructions requested, not yet written
  logic [DRAM_AW-1:0] base;
  logic [15:0]        len, beats_iss, beats_rsp;
  logic [15:0]        nbeats;
  logic               lo_ok, hi_ok, fire;
  logic [1:0]         npush;
  logic               do_pop;

  assign nbeats    = (len + 16'd1) >> 1;
  assign req_valid = (beats_iss < nbeats) && (32'(cnt) + 32'(inflight) + 2 <= DEPTH);
  assign req.we    = 1'b0;
  assign req.addr  = base + DRAM_AW'(beats_iss);
  assign req.wdata = '0;
  assign fire      = req_valid && req_ready;

  assign lo_ok  = rsp_valid && ({beats_rsp[14:0], 1'b0} < len);
  assign hi_ok  = rsp_valid && ({beats_rsp[14:0], 1'b1} < len);
  assign npush  = 2'(lo_ok) + 2'(hi_ok);
  assign do_pop = pop && out_valid;

  always_ff @(posedge clk) begin
    if (lo_ok) mem[wp] <= instr_t'(rsp_data[63:0]);
    if (hi_ok) mem[wp + PW'(lo_ok)] <= instr_t'(rsp_data[127:64]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      rp        <= '0;
      cnt       <= '0;
      inflight  <= '0;
      base      <= '0;
      len       <= '0;
      beats_iss <= '0;
      beats_rsp <= '0;
    end else if (start) begin
      wp        <= '0;
      rp        <= '0;
      cnt       <= '0;
      inflight  <= '0;
      base      <= prog_addr;
      len       <= prog_len;
      beats_iss <= '0;
      beats_rsp <= '0;
    end else begin
      if (fire) beats_iss <= beats_iss + 1'b1;
      if (rsp_valid) beats_rsp <= beats_rsp + 1'b1;
      wp       <= wp + PW'(npush);
      rp       <= rp + PW'(do_pop);
      cnt      <= cnt + (PW+1)'(npush) - (PW+1)'(do_pop);
      inflight <= inflight + (fire ? (PW+1)'(2) : '0) - (rsp_valid ? (PW+1)'(2) : '0);
    end
  end

  assign out_valid = (cnt != 0);
  assign out_instr = mem[rp];

endmodule

// tb_flexvector_top: end-to-end test of the FlexVector processor at its
// default sizes, running one small GCN layer and an extra 32-bit SpMM.
//
// The testbench plays the compiler and the DRAM. It builds, in DRAM, the data
// and one instruction program for three SpMM phases on a 32-node graph:
//   P1  H   = X x W      (combination: sparse features x dense weights),
//        INT8, double-VRF, alternately a fully dynamic VRF and a fixed region
//        sized with the single-VRF bound (so MV_Dyn must wait on rows still
//        locked by the running CMP);
//   P2  O   = A x H      (aggregation: adjacency x P1's result, read back
//        from DRAM), INT8, double-VRF, fixed region chosen by the top-k
//        search (largest k with k + two largest row misses <= VRF depth);
//   P3  O32 = A x H32    INT32, single-VRF, top-k with k + largest miss <= depth.
// Each 16x16 tile goes through the ISA sequence LD_D, LD_S, Config, CAL_IDX,
// MV_Fixed, then MV_Dyn + CMP per sparse row, and the output tile is
// accumulated in the Dense Buffer across column tiles (inner product at the
// DRAM-buffer level) before ST_D. Rows with more than TAU=6 nonzeros are
// split by the intra-tile vertex-cut (hot columns spread over the sub-rows);
// sub-rows of one output row are chained through partial sums, kept in the
// Temp Matrix rows while more sub-rows follow and in the Result Matrix rows
// otherwise. A sparse tile is cut into loads that fit half of the 256 B
// Sparse Buffer; the two halves are used as a double buffer, the next load
// being issued right after the current chunk's MV_Fixed so that it runs under
// its CMPs. Dense tiles rotate over the six rows-to-compute sub-buffers.
// The ISA order per tile and the buffer multi-buffering follow the published
// design; the chunking, the placement of the wait bits and the DRAM model are
// this testbench's own choices.
//
// Checked: every output element against a reference computed here (modulo
// the element width), no VRF miss, the MAC-cycle count equal to nonzeros plus
// partial-sum additions (one nonzero per cycle), and that each mechanism
// occurred: instruction stalls, fixed-region hits, VRF-lock stalls,
// partial-sum read-after-write stalls, Dense Buffer port stalls, MV_Dyn/CMP
// overlap, DMA/compute overlap, Sparse Buffer loading under CMP, vertex-cut
// partial sums, both precisions,
// single-VRF waiting and use of all six dense sub-buffers.
module tb_flexvector_top;
  import fv_pkg::*;

  localparam int N     = 32;     // graph nodes
  localparam int F     = 16;     // input feature dimension
  localparam int TAU   = 6;      // vertex-cut bound
  localparam int D     = VRF_DEPTH;
  localparam int DW    = 16384;  // DRAM beats
  localparam int LAT   = 12;     // DRAM read latency (cycles)
  localparam int RES   = 96;     // Result Matrix region base row
  localparam int TMP   = 112;    // Temp Matrix region base row
  localparam int WDOG  = 400000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               start = 1'b0;
  logic [DRAM_AW-1:0] prog_addr = '0;
  logic [15:0]        prog_len = '0;
  logic               done, vrf_miss;
  perf_t              perf;
  logic               mem_req_valid, mem_req_ready = 1'b0;
  bus_req_t           mem_req;
  logic               mem_rsp_valid = 1'b0;
  logic [VLEN-1:0]    mem_rsp_data = '0;

  flexvector_top dut (
    .clk, .rst_n, .start, .prog_addr, .prog_len, .done, .vrf_miss, .perf,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_data
  );

  // ---------------- DRAM model ----------------
  logic [VLEN-1:0] dram [DW];
  logic [VLEN-1:0] rq_data [$];
  int              rq_due  [$];
  int              cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    mem_rsp_valid <= 1'b0;
    if (rq_due.size() > 0 && rq_due[0] <= cyc) begin
      mem_rsp_valid <= 1'b1;
      mem_rsp_data  <= rq_data.pop_front();
      void'(rq_due.pop_front());
    end
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req.we) dram[14'(mem_req.addr)] <= mem_req.wdata;
      else begin
        rq_data.push_back(dram[14'(mem_req.addr)]);
        rq_due.push_back(cyc + LAT);
      end
    end
    mem_req_ready <= ($urandom % 5) != 0;
  end

  // ---------------- counters ----------------
  int checks = 0, failures = 0;
  int ev_dma_cmp = 0, ev_single_wait = 0, ev_int32_mac = 0, ev_int8_mac = 0;
  int ev_vcut = 0, ev_psum = 0, exp_mac = 0, ev_sb_overlap = 0;
  bit sub_used [M_BUF];

  always @(posedge clk) begin
    if (dut.dma_busy && dut.cmp_busy) ev_dma_cmp++;
    if (dut.dma_busy && dut.u_dma.op_r == DMA_LD_S && dut.cmp_busy) ev_sb_overlap++;
    if (dut.u_ctrl.issue_stall && dut.ib_instr.op == OP_MV_DYN && !dut.double_vrf && dut.cmp_busy)
      ev_single_wait++;
    if (dut.mac_fire && dut.prec == PREC_INT32) ev_int32_mac++;
    if (dut.mac_fire && dut.prec == PREC_INT8) ev_int8_mac++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- matrices ----------------
  int X   [N][F];
  int Wm  [F][16];
  int A   [N][N];
  int H32 [N][4];
  int Href [N][16];
  int Oref [N][16];
  int O32ref [N][4];

  // current sparse operand of the program builder
  int SP [N][N];
  int sp_rows, sp_cols;

  // ---------------- program builder ----------------
  instr_t prog [$];
  int     heap = 0;

  function automatic int alloc(int beats);
    int a = heap;
    heap += beats;
    return a;
  endfunction

  function automatic void emit(opcode_e op, bit wd, bit wv, int flags, int a, int b, int c);
    instr_t i;
    i.op = op; i.wait_dma = wd; i.wait_vex = wv; i.flags = 4'(flags);
    i.a = 24'(a); i.b = 14'(b); i.c = 16'(c);
    prog.push_back(i);
  endfunction

  typedef struct {
    int r;
    int n;
    int cols [TAU];
    bit psum;
    int src;
    int dst;
  } subrow_t;

  int dense_seq = 0;

  // Intra-tile vertex-cut of tile (I,K) of SP: rows with more than TAU
  // nonzeros are split; the TAU most used columns of the tile are "hits",
  // the others "misses", and both are spread evenly over the sub-rows.
  function automatic void vertex_cut(int I, int K, bit keep_empty, ref subrow_t subs [$]);
    int cnz [16];
    int order [16];
    bit hot [16];
    for (int c = 0; c < 16; c++) begin
      cnz[c] = 0;
      for (int r = 0; r < 16; r++)
        if (I*16 + r < sp_rows && K*16 + c < sp_cols && SP[I*16+r][K*16+c] != 0) cnz[c]++;
      order[c] = c;
    end
    for (int x = 0; x < 16; x++)
      for (int y = x + 1; y < 16; y++)
        if (cnz[order[y]] > cnz[order[x]]) begin int t = order[x]; order[x] = order[y]; order[y] = t; end
    for (int c = 0; c < 16; c++) hot[c] = 0;
    for (int x = 0; x < TAU; x++) hot[order[x]] = 1;
    for (int r = 0; r < 16; r++) begin
      int cols [$];
      int miss [$], hit [$];
      if (I*16 + r >= sp_rows) continue;
      for (int c = 0; c < 16; c++)
        if (K*16 + c < sp_cols && SP[I*16+r][K*16+c] != 0) cols.push_back(c);
      if (cols.size() <= TAU) begin
        subrow_t s;
        if (cols.size() == 0 && !keep_empty) continue;
        s.r = r; s.n = cols.size();
        foreach (cols[x]) s.cols[x] = cols[x];
        subs.push_back(s);
      end else begin
        int kc, nm, nh;
        ev_vcut++;
        foreach (cols[x]) if (hot[cols[x]]) hit.push_back(cols[x]); else miss.push_back(cols[x]);
        kc = (cols.size() + TAU - 1) / TAU;
        nm = (miss.size() + kc - 1) / kc;
        nh = TAU - nm;
        for (int p = 0; p < kc; p++) begin
          subrow_t s;
          s.r = r; s.n = 0;
          for (int q = 0; q < nm && miss.size() > 0; q++) s.cols[s.n++] = miss.pop_front();
          for (int q = 0; q < nh && hit.size() > 0; q++) s.cols[s.n++] = hit.pop_front();
          if (s.n > 0) subs.push_back(s);
        end
        while (miss.size() + hit.size() > 0) begin
          subrow_t s;
          s.r = r; s.n = 0;
          while (s.n < TAU && miss.size() > 0) s.cols[s.n++] = miss.pop_front();
          while (s.n < TAU && hit.size() > 0) s.cols[s.n++] = hit.pop_front();
          subs.push_back(s);
        end
      end
    end
  endfunction

  // Top-k fixed-region search over one sparse load (misses count the
  // partial-sum row). Returns the fixed-row mask.
  function automatic int topk_mask(ref subrow_t subs [$], input bit dbl);
    int cnz [16];
    int order [16];
    int k, best_k, mask;
    bit found = 0;
    bit went_up = 0;
    for (int c = 0; c < 16; c++) begin cnz[c] = 0; order[c] = c; end
    foreach (subs[s]) for (int x = 0; x < subs[s].n; x++) cnz[subs[s].cols[x]]++;
    for (int x = 0; x < 16; x++)
      for (int y = x + 1; y < 16; y++)
        if (cnz[order[y]] > cnz[order[x]]) begin int t = order[x]; order[x] = order[y]; order[y] = t; end
    k = (TAU + 1) / 2;
    best_k = 0;
    while (k > 0 && k <= D && k <= 16 && cnz[order[k-1]] > 0) begin
      int m0 = 0, m1 = 0;
      bit fit;
      foreach (subs[s]) begin
        int m = int'(subs[s].psum);
        for (int x = 0; x < subs[s].n; x++) begin
          bit in_top = 0;
          for (int y = 0; y < k; y++) if (order[y] == subs[s].cols[x]) in_top = 1;
          if (!in_top) m++;
        end
        if (m > m0) begin m1 = m0; m0 = m; end
        else if (m > m1) m1 = m;
      end
      fit = dbl ? (k + m0 + m1 <= D) : (k + m0 <= D);
      if (fit) begin best_k = k; found = 1; went_up = 1; k++; end
      else if (went_up) break;
      else k--;
    end
    if (!found) best_k = 0;
    mask = 0;
    for (int y = 0; y < best_k; y++) mask |= 1 << order[y];
    return mask;
  endfunction

  // Program for OUT = SP x DENSE. dense_at: DRAM beat of dense row 0,
  // out_at: DRAM beat of output row 0. kmode: 0 = no fixed region,
  // 1 = top-k search, 2 = alternately no fixed region and a top-k sized with
  // the single-VRF bound even in double-VRF mode (k + largest miss <= depth),
  // so that the dynamic slots of consecutive rows may collide and the VRF
  // lock interlock must resolve it.
  // Pass 1 cuts every tile into Sparse Buffer loads ("chunks") of at most
  // half the buffer; pass 2 emits them with the Sparse Buffer used as a
  // double buffer: chunk j+1 (and its tile's LD_D) is loaded into the other
  // half right after chunk j's Config/CAL_IDX/MV_Fixed, i.e. while chunk j
  // computes. Config carries wait_dma, so a chunk never starts before its
  // data is in; it issues only when all vector units are idle, so the half
  // being overwritten is no longer read.
  typedef struct {
    int at, nb, mask, sub, npairs, pair0, ldd_at, std_at;
  } chunk_t;

  function automatic void build_phase(int dense_at, int out_at, bit int32, bit dbl, int kmode);
    int nI = (sp_rows + 15) / 16;
    int nK = (sp_cols + 15) / 16;
    chunk_t chunks [$];
    int pr_psum [$];
    int pr_src [$];
    int pr_dst [$];
    int half = SB_WORDS / 2;
    for (int I = 0; I < nI; I++) begin
      int loc [16];   // 0 none, 1 result, 2 temp
      for (int r = 0; r < 16; r++) loc[r] = 0;
      for (int K = 0; K < nK; K++) begin
        subrow_t subs [$];
        int sub = dense_seq % M_BUF;
        int p = 0;
        bit first = 1;
        vertex_cut(I, K, K == 0, subs);
        if (subs.size() == 0) continue;
        dense_seq++;
        sub_used[sub] = 1;
        // partial-sum chaining
        foreach (subs[s]) begin
          bit more = 0;
          for (int t = s + 1; t < subs.size(); t++) if (subs[t].r == subs[s].r) more = 1;
          subs[s].psum = (loc[subs[s].r] != 0);
          subs[s].src  = (loc[subs[s].r] == 2) ? TMP + subs[s].r : RES + subs[s].r;
          subs[s].dst  = more ? TMP + subs[s].r : RES + subs[s].r;
          loc[subs[s].r] = more ? 2 : 1;
          if (subs[s].psum) ev_psum++;
        end
        // cut into Sparse Buffer loads of at most half the buffer
        while (p < subs.size()) begin
          subrow_t ch [$];
          chunk_t  c;
          int words = 1;
          int w, nz;
          while (p < subs.size() && ch.size() < RIB_DEPTH && words + 1 + subs[p].n <= half) begin
            words += 1 + subs[p].n;
            ch.push_back(subs[p]);
            p++;
          end
          c.nb = (words + 3) / 4;
          c.at = alloc(c.nb);
          begin
            logic [31:0] wv [SB_WORDS];
            nz = 0;
            for (int x = 0; x < SB_WORDS; x++) wv[x] = '0;
            foreach (ch[s]) begin
              wv[s] = 32'(nz);
              nz += ch[s].n;
            end
            wv[ch.size()] = 32'(nz);
            w = ch.size() + 1;
            foreach (ch[s]) for (int x = 0; x < ch[s].n; x++) begin
              int v = SP[I*16 + ch[s].r][K*16 + ch[s].cols[x]];
              wv[w++] = {8'(ch[s].cols[x]), 24'(v)};
              exp_mac++;
            end
            foreach (ch[s]) if (ch[s].psum) exp_mac++;
            for (int b = 0; b < c.nb; b++)
              dram[c.at + b] = {wv[4*b+3], wv[4*b+2], wv[4*b+1], wv[4*b]};
          end
          c.mask   = (kmode == 1) ? topk_mask(ch, dbl) :
                     (kmode == 2 && chunks.size() % 2 == 0) ? topk_mask(ch, 0) : 0;
          c.sub    = sub;
          c.npairs = ch.size();
          c.pair0  = pr_src.size();
          c.ldd_at = first ? dense_at + K*16 : -1;
          c.std_at = -1;
          first = 0;
          foreach (ch[s]) begin
            pr_psum.push_back(int'(ch[s].psum)); pr_src.push_back(ch[s].src); pr_dst.push_back(ch[s].dst);
          end
          chunks.push_back(c);
        end
      end
      chunks[chunks.size() - 1].std_at = out_at + I*16;
    end
    // pass 2: emit
    foreach (chunks[j]) begin
      if (j == 0) begin
        if (chunks[j].ldd_at >= 0) emit(OP_LD_D, 0, 1, 0, chunks[j].ldd_at, chunks[j].sub*16, 16);
        emit(OP_LD_S, 0, 1, 0, chunks[j].at, 0, chunks[j].nb);
      end
      emit(OP_CONFIG, 1, 0, 0, chunks[j].mask,
           (chunks[j].sub << 2) | (int'(int32) << 1) | int'(dbl), (j % 2) * half);
      emit(OP_CAL_IDX, 0, 0, 0, 0, 0, chunks[j].npairs);
      emit(OP_MV_FIXED, 0, 0, 0, 0, 0, 0);
      if (j + 1 < chunks.size()) begin
        if (chunks[j+1].ldd_at >= 0) emit(OP_LD_D, 0, 0, 0, chunks[j+1].ldd_at, chunks[j+1].sub*16, 16);
        emit(OP_LD_S, 0, 0, 0, chunks[j+1].at, ((j + 1) % 2) * half, chunks[j+1].nb);
      end
      for (int s = 0; s < chunks[j].npairs; s++) begin
        int q = chunks[j].pair0 + s;
        emit(OP_MV_DYN, 0, 0, pr_psum[q], pr_src[q], 0, s);
        emit(OP_CMP, 0, 0, pr_psum[q], pr_src[q], pr_dst[q], s);
      end
      if (chunks[j].std_at >= 0) emit(OP_ST_D, 0, 1, 0, chunks[j].std_at, RES, 16);
    end
  endfunction

  // ---------------- stimulus ----------------
  int x_at, w_at, h_at, o_at, h32_at, o32_at, p_at;

  initial begin
    for (int b = 0; b < DW; b++) dram[b] = '0;
    // features: 30% dense, a few rows much denser, some with one nonzero
    for (int r = 0; r < N; r++)
      for (int c = 0; c < F; c++) begin
        automatic int pct = (r % 7 == 0 || r % 5 == 2) ? 80 : 30;
        automatic int u = int'($urandom % 100);
        automatic int v = int'($signed(8'($urandom % 255 + 1)));
        X[r][c] = (u < pct) ? v : 0;
      end
    // every fifth row has a single nonzero: its short CMP writes back while
    // the mover is still reading the next, longer row (port conflicts)
    for (int r = 1; r < N; r += 5) begin
      for (int c = 0; c < F; c++) X[r][c] = 0;
      X[r][$urandom % F] = 1 + int'($urandom % 100);
    end
    for (int r = 0; r < F; r++)
      for (int c = 0; c < 16; c++) Wm[r][c] = int'($signed(8'($urandom)));
    // adjacency: self loops, a ring, two hub nodes (power-law like)
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) A[r][c] = 0;
    for (int r = 0; r < N; r++) begin
      A[r][r] = 1 + $urandom % 3;
      A[r][(r + 1) % N] = 1;
      A[(r + 1) % N][r] = 1;
      if ($urandom % 4 == 0) begin
        automatic int c = $urandom % N;
        A[r][c] = 2; A[c][r] = 2;
      end
    end
    for (int r = 0; r < N; r++) if (r % 3 == 0) begin A[0][r] = 1; A[r][0] = 1; end
    for (int r = 0; r < N; r++) if (r % 2 == 1) begin A[17][r] = -1; A[r][17] = -1; end
    for (int r = 0; r < N; r++) for (int c = 0; c < 4; c++) H32[r][c] = int'($urandom) - 32'h4000_0000;

    // references (element-width wrap-around)
    for (int r = 0; r < N; r++) for (int c = 0; c < 16; c++) begin
      automatic int s = 0;
      for (int k = 0; k < F; k++) s += X[r][k] * Wm[k][c];
      Href[r][c] = int'($signed(8'(s)));
    end
    for (int r = 0; r < N; r++) for (int c = 0; c < 16; c++) begin
      automatic int s = 0;
      for (int k = 0; k < N; k++) s += A[r][k] * Href[k][c];
      Oref[r][c] = int'($signed(8'(s)));
    end
    for (int r = 0; r < N; r++) for (int c = 0; c < 4; c++) begin
      automatic int s = 0;
      for (int k = 0; k < N; k++) s += A[r][k] * H32[k][c];
      O32ref[r][c] = s;
    end

    // DRAM layout and program
    p_at   = alloc(2048);
    w_at   = alloc(16);
    h_at   = alloc(N);
    o_at   = alloc(N);
    h32_at = alloc(N);
    o32_at = alloc(N);
    for (int r = 0; r < F; r++)
      for (int c = 0; c < 16; c++) dram[w_at + r][8*c +: 8] = 8'(Wm[r][c]);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < 4; c++) dram[h32_at + r][32*c +: 32] = 32'(H32[r][c]);

    for (int r = 0; r < N; r++) for (int c = 0; c < F; c++) SP[r][c] = X[r][c];
    sp_rows = N; sp_cols = F;
    build_phase(w_at, h_at, 0, 1, 2);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) SP[r][c] = A[r][c];
    sp_rows = N; sp_cols = N;
    build_phase(h_at, o_at, 0, 1, 1);
    build_phase(h32_at, o32_at, 1, 0, 1);
    emit(OP_HALT, 0, 0, 0, 0, 0, 0);
    if (prog.size() > 4096) $fatal(1, "program too long");
    for (int b = 0; b < (prog.size() + 1) / 2; b++)
      dram[p_at + b] = {(2*b + 1 < prog.size()) ? 64'(prog[2*b+1]) : 64'd0, 64'(prog[2*b])};
    $display("program: %0d instructions, %0d nonzero+psum MACs expected", prog.size(), exp_mac);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    prog_addr = DRAM_AW'(p_at);
    prog_len  = 16'(prog.size());
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    wait (done);
    repeat (2) @(posedge clk);

    for (int r = 0; r < N; r++) for (int c = 0; c < 16; c++)
      check(int'($signed(dram[h_at + r][8*c +: 8])) == Href[r][c], $sformatf("H[%0d][%0d]", r, c));
    for (int r = 0; r < N; r++) for (int c = 0; c < 16; c++)
      check(int'($signed(dram[o_at + r][8*c +: 8])) == Oref[r][c], $sformatf("O[%0d][%0d] got %0d exp %0d",
            r, c, $signed(dram[o_at + r][8*c +: 8]), Oref[r][c]));
    for (int r = 0; r < N; r++) for (int c = 0; c < 4; c++)
      check(dram[o32_at + r][32*c +: 32] == 32'(O32ref[r][c]), $sformatf("O32[%0d][%0d]", r, c));
    check(!vrf_miss, "no VRF miss");
    check(perf.mac_cycles == 32'(exp_mac), $sformatf("MAC cycles %0d exp %0d", perf.mac_cycles, exp_mac));

    $display("cycles=%0d issue_stalls=%0d fixed_hits=%0d lock_stalls=%0d psum_stalls=%0d port_stalls=%0d overlap=%0d",
             perf.cycles, perf.issue_stalls, perf.fixed_hits, perf.lock_stalls, perf.psum_stalls,
             perf.port_stalls, perf.overlap);
    $display("dma/cmp overlap=%0d single-VRF waits=%0d int8 MACs=%0d int32 MACs=%0d vertex-cut rows=%0d psum CMPs=%0d",
             ev_dma_cmp, ev_single_wait, ev_int8_mac, ev_int32_mac, ev_vcut, ev_psum);
    $display("sparse double-buffer loads under CMP: %0d cycles", ev_sb_overlap);
    check(perf.issue_stalls > 0, "instruction stall happened");
    check(perf.fixed_hits > 0, "fixed-region hit happened");
    check(perf.lock_stalls > 0, "VRF lock stall happened");
    check(perf.psum_stalls > 0, "partial-sum interlock happened");
    check(perf.port_stalls > 0, "Dense Buffer port stall happened");
    check(perf.overlap > 0, "MV_Dyn/CMP overlap happened");
    check(ev_dma_cmp > 0, "DMA/compute overlap happened");
    check(ev_sb_overlap > 0, "Sparse Buffer double-buffer load under CMP happened");
    check(ev_single_wait > 0, "single-VRF MV_Dyn wait happened");
    check(ev_int8_mac > 0 && ev_int32_mac > 0, "both precisions used");
    check(ev_vcut > 0 && ev_psum > 0, "vertex-cut partial sums happened");
    begin
      automatic bit all = 1;
      foreach (sub_used[s]) if (!sub_used[s]) all = 0;
      check(all, "all dense sub-buffers used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

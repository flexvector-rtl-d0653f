// tb_controller: feeds the controller a long random instruction stream (all
// opcodes, random wait bits and fields, alternating single/double-VRF
// Config) from a FIFO model, and models each unit as busy for a random time
// after its start pulse. Every cycle a reference of the issue rules decides
// whether the head instruction may go; the test checks that the controller
// pops exactly then, raises exactly the matching start pulse with the
// instruction's fields, updates the Config state (mask, k, mode, precision,
// tile base = sub-buffer x 16, sparse base), stalls otherwise, and raises
// `done` after HALT. It also counts how often each interlock held an
// instruction back, and that MV_Dyn overlapped a running CMP only in
// double-VRF mode.
// The instruction set and the single/double-VRF rule follow the published
// design; the encoding, wait bits and other interlocks checked here are this
// design's own.
module tb_controller;
  import fv_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n = 0;
  logic start = 0, done, in_valid = 0, in_pop;
  instr_t in_instr = '0;
  logic dma_busy, dec_busy, cmp_busy, mv_busy;
  logic cfg_load, double_vrf, dma_start, cal_start, cmp_start, cmp_psum, fix_start, dyn_start, dyn_psum, issue_stall;
  logic [15:0] fixed_mask, dma_len;
  logic [4:0] cfg_k, cmp_row, dyn_row;
  prec_e prec;
  logic [6:0] tile_base, cmp_psum_addr, cmp_dest, psum_addr;
  logic [5:0] sb_base, cal_nrows;
  dma_op_e dma_op;
  logic [23:0] dma_dram_addr;
  logic [7:0] dma_buf_addr;

  controller dut (.clk, .rst_n, .start, .done, .in_valid, .in_instr, .in_pop, .dma_busy, .dec_busy,
                  .cmp_busy, .mv_busy, .cfg_load, .fixed_mask, .cfg_k, .double_vrf, .prec, .tile_base,
                  .sb_base, .dma_start, .dma_op, .dma_dram_addr, .dma_buf_addr, .dma_len, .cal_start,
                  .cal_nrows, .cmp_start, .cmp_row, .cmp_psum, .cmp_psum_addr, .cmp_dest, .fix_start,
                  .dyn_start, .dyn_row, .dyn_psum, .psum_addr, .issue_stall);

  int checks = 0, failures = 0;
  int t_dma = 0, t_dec = 0, t_cmp = 0, t_mv = 0;
  assign dma_busy = (t_dma > 0);
  assign dec_busy = (t_dec > 0);
  assign cmp_busy = (t_cmp > 0);
  assign mv_busy  = (t_mv > 0);

  instr_t prog [$];
  int n_stall_unit = 0, n_stall_wait = 0, n_ovl_double = 0, n_single_hold = 0, n_issued = 0;
  bit exp_double = 0;

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  function automatic instr_t rnd_instr(input int n, input int len);
    instr_t x;
    x = instr_t'({$urandom, $urandom});
    if (n == len - 1) x.op = OP_HALT;
    else if (n % 25 == 0) x.op = OP_CONFIG;
    else case ($urandom % 8)
      0: x.op = OP_LD_S;   1: x.op = OP_LD_D;   2: x.op = OP_ST_D;  3: x.op = OP_CAL_IDX;
      4: x.op = OP_MV_FIXED; 5, 6: x.op = OP_MV_DYN; default: x.op = OP_CMP;
    endcase
    if ($urandom % 4 != 0) begin x.wait_dma = 0; x.wait_vex = 0; end
    if (x.op == OP_CONFIG) x.b[0] = 1'((n / 25) % 2);
    if ($urandom % 20 == 0) x.op = OP_NOP;
    return x;
  endfunction

  // reference issue rule
  function automatic bit may_issue(input instr_t x);
    bit vidle = !(dec_busy || cmp_busy || mv_busy);
    bit unit;
    case (x.op)
      OP_LD_S, OP_LD_D, OP_ST_D: unit = !dma_busy;
      OP_CAL_IDX:                unit = !dec_busy && !cmp_busy;
      OP_MV_DYN:                 unit = !mv_busy && (exp_double || !cmp_busy);
      OP_CONFIG, OP_MV_FIXED, OP_CMP: unit = vidle;
      OP_HALT:                   unit = vidle && !dma_busy;
      default:                   unit = 1;
    endcase
    if (x.wait_dma && dma_busy) return 0;
    if (x.wait_vex && !vidle) return 0;
    return unit;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 6; p++) begin
      automatic int len = 300;
      automatic int cyc = 0;
      prog.delete();
      for (int n = 0; n < len; n++) prog.push_back(rnd_instr(n, len));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done && cyc < 20000) begin
        automatic instr_t x;
        automatic bit exp_issue;
        automatic bit cfg_issued;
        // the fifo may be empty for a while
        in_valid = (prog.size() > 0) && ($urandom % 5 != 0);
        in_instr = (prog.size() > 0) ? prog[0] : '0;
        x = in_instr;
        #1;
        exp_issue = in_valid && may_issue(x);
        chk(in_pop == exp_issue, $sformatf("pop of op %0d: got %0b exp %0b", x.op, in_pop, exp_issue));
        chk(issue_stall == (in_valid && !exp_issue), "issue_stall");
        chk(dma_start == (in_pop && x.op inside {OP_LD_S, OP_LD_D, OP_ST_D}), "dma_start");
        chk(cal_start == (in_pop && x.op == OP_CAL_IDX), "cal_start");
        chk(cmp_start == (in_pop && x.op == OP_CMP), "cmp_start");
        chk(fix_start == (in_pop && x.op == OP_MV_FIXED), "fix_start");
        chk(dyn_start == (in_pop && x.op == OP_MV_DYN), "dyn_start");
        chk(cfg_load == (in_pop && x.op == OP_CONFIG), "cfg_load");
        if (in_valid && !exp_issue) begin
          if (!may_issue('{op: x.op, default: '0})) n_stall_unit++; else n_stall_wait++;
          if (x.op == OP_MV_DYN && !mv_busy && cmp_busy) n_single_hold++;
        end
        cfg_issued = in_pop && x.op == OP_CONFIG;
        if (in_pop) begin
          n_issued++;
          case (x.op)
            OP_LD_S, OP_LD_D, OP_ST_D: begin
              chk(dma_op == ((x.op == OP_LD_S) ? DMA_LD_S : (x.op == OP_LD_D) ? DMA_LD_D : DMA_ST_D)
                  && dma_dram_addr == x.a && dma_buf_addr == x.b[7:0] && dma_len == x.c, "dma fields");
              t_dma = 1 + $urandom % 20;
            end
            OP_CAL_IDX: begin chk(cal_nrows == x.c[5:0], "cal fields"); t_dec = 1 + $urandom % 10; end
            OP_CMP: begin
              chk(cmp_row == x.c[4:0] && cmp_psum == x.flags[0] && cmp_psum_addr == x.a[6:0] && cmp_dest == x.b[6:0], "cmp fields");
              t_cmp = 1 + $urandom % 10;
            end
            OP_MV_FIXED: t_mv = 1 + $urandom % 8;
            OP_MV_DYN: begin
              chk(dyn_row == x.c[4:0] && dyn_psum == x.flags[0] && psum_addr == x.a[6:0], "dyn fields");
              if (cmp_busy) begin chk(exp_double, "MV_Dyn overlaps CMP only in double mode"); n_ovl_double++; end
              t_mv = 1 + $urandom % 8;
            end
            OP_CONFIG: chk(32'(cfg_k) == $countones(x.a[15:0]), "cfg_k");
            default: ;
          endcase
          void'(prog.pop_front());
        end
        @(posedge clk);
        #1;
        if (cfg_issued) begin
          chk(fixed_mask == x.a[15:0] && double_vrf == x.b[0] && prec == prec_e'(x.b[1])
              && tile_base == 7'(16 * x.b[4:2]) && sb_base == x.c[5:0], "Config state");
          exp_double = x.b[0];
        end
        if (t_dma > 0) t_dma--;
        if (t_dec > 0) t_dec--;
        if (t_cmp > 0) t_cmp--;
        if (t_mv > 0) t_mv--;
        @(negedge clk);
        cyc++;
      end
      chk(done && prog.size() == 0, "done after HALT");
      repeat (3) @(negedge clk);
      chk(done && !in_pop, "done holds, nothing issues");
    end
    chk(n_stall_unit > 0 && n_stall_wait > 0 && n_single_hold > 0 && n_ovl_double > 0,
        $sformatf("stall kinds: unit %0d wait %0d single-hold %0d double-overlap %0d",
                  n_stall_unit, n_stall_wait, n_single_hold, n_ovl_double));
    $display("issued=%0d unit-stalls=%0d wait-stalls=%0d single-hold=%0d double-overlap=%0d",
             n_issued, n_stall_unit, n_stall_wait, n_single_hold, n_ovl_double);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

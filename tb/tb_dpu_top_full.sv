// tb_dpu_top_full: the end-to-end test of tb_dpu_top on the DPU at its default,
// full size (64 compute units, 64 global banks).
//
// The testbench generates a random multi-superlayer DAG program for every CU,
// loads it through the host port, runs it, reads the global scratchpad back
// and compares every stored word with a reference model. The model runs each
// CU's program in order on its own register file and memories (posit results
// from the package reference); the program obeys the rules the hardware
// relies on, so the order in which CUs run does not matter:
//  - every store goes to a fresh address, loads read only words stored in an
//    earlier phase (global words: an earlier superlayer or the host; local
//    words: before the last local barrier);
//  - a superlayer is: set_ld_stream_len, set_precision, phase A, local
//    barrier, set_ld_stream_len, phase B, global barrier.
// Loads are biased towards bank 0 and CU 0 stores a lot to bank 0, so bank
// conflicts and store-priority blocking occur. Each superlayer uses a
// different precision per CU, so all three precisions run.
// Mechanism counters (any that stays zero is a failure): PE stall cycles on
// the load FIFO, two-word pops, local barrier wait
// cycles, global barrier wait cycles, global barriers (go pulses), load bank
// conflicts, loads blocked by a store, ALU ops in 32b, 16b and 8b, local
// loads and stores, global loads and stores. (The store FIFO never fills in
// this design: the store unit drains one word per cycle and stores are always
// accepted, so a store-FIFO-full stall is not counted.)
module tb_dpu_top_full;
  import dpu_pkg::*;
  import dpu_tb_pkg::*;

  localparam int NCU  = 64;   // the chip's size (dpu_top default)
  localparam int NSL  = 5;     // superlayers
  localparam int BW   = $clog2(NCU);

  logic clk = 0, rst_n = 0, start = 0, done;
  logic host_we = 0, host_re = 0;
  host_sel_e host_sel = HSEL_IMEM;
  logic [BW-1:0] host_cu = '0;
  logic [15:0] host_addr = '0;
  logic [31:0] host_wdata = '0, host_rdata;

  dpu_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- program and model
  logic [20:0] prog   [NCU][$];
  logic [21:0] ldlist [NCU][$];
  logic [10:0] stlist [NCU][$];
  logic [31:0] regs   [NCU][32];
  logic [31:0] lmem   [NCU][int];
  logic [31:0] gmem   [NCU][int];       // [bank][addr], model contents
  int          g_rd_bank[$], g_rd_addr[$];   // readable global words
  int          l_rd[NCU][$];                 // readable local words per CU
  int          g_next[NCU], l_next[NCU];
  int          pend_gb[$], pend_ga[$];
  int          pend_l[NCU][$];
  prec_e       cprec[NCU];

  function automatic int pick_dst(input int avoid1, input int avoid2);
    int d;
    do d = $urandom_range(31); while (d == avoid1 || d == avoid2);
    return d;
  endfunction

  // one load: choose a readable word, add the address entry, return the value
  function automatic logic [31:0] gen_load(input int c, input int dst, input bit allow_local);
    int i, b, a;
    if (allow_local && l_rd[c].size() > 0 && $urandom_range(2) == 0) begin
      a = l_rd[c][$urandom_range(l_rd[c].size() - 1)];
      ldlist[c].push_back(ld_l(a, dst));
      return lmem[c][a];
    end
    if ($urandom_range(1) == 0) begin                 // bias to bank 0
      do i = $urandom_range(g_rd_bank.size() - 1); while (g_rd_bank[i] != 0 && $urandom_range(3) != 0);
    end else i = $urandom_range(g_rd_bank.size() - 1);
    b = g_rd_bank[i]; a = g_rd_addr[i];
    ldlist[c].push_back(ld_g(b, a, dst));
    return gmem[b][a];
  endfunction

  // one phase of nload loads and some ALU ops for CU c
  task automatic gen_phase(input int c, input int nload, input int nalu);
    int left_ld, left_alu, d0, d1, dalu, s1, s2;
    bit l0, l1, st, alu;
    logic [31:0] v0, v1, res;
    opcode_e ops[4] = '{OP_ADD, OP_MUL, OP_MAX, OP_MIN};
    opcode_e o;
    left_ld = nload; left_alu = nalu;
    while (left_ld > 0 || left_alu > 0) begin
      alu = (left_alu > 0) && (left_ld == 0 || $urandom_range(2) != 0);
      l0  = (left_ld > 0) && $urandom_range(1);
      l1  = (left_ld > (l0 ? 1 : 0)) && (!alu || $urandom_range(1));
      if (!alu && !l0 && !l1) l0 = 1;                 // a pure load needs a word
      o = ops[$urandom_range(3)];
      s1 = $urandom_range(31); s2 = $urandom_range(31);
      dalu = alu ? $urandom_range(31) : -1;
      st = alu && ((c == 0) || $urandom_range(1));
      res = ref_op(o, cprec[c], regs[c][s1], regs[c][s2]);
      d0 = -1; d1 = -1;
      if (l0) begin d0 = pick_dst(dalu, -1); v0 = gen_load(c, d0, 1); end
      if (l1) begin d1 = pick_dst(dalu, d0); v1 = gen_load(c, d1, 1); end
      if (alu) prog[c].push_back(ins(o, s1, s2, dalu, l0, l1, st));
      else     prog[c].push_back(ins_imm(OP_SET_PREC, int'(cprec[c]), l0, l1));
      if (l0) regs[c][d0] = v0;
      if (l1) regs[c][d1] = v1;
      if (alu) regs[c][dalu] = res;
      if (st) begin
        if (c != 0 && $urandom_range(2) == 0) begin
          stlist[c].push_back(st_l(l_next[c]));
          lmem[c][l_next[c]] = res; pend_l[c].push_back(l_next[c]); l_next[c]++;
        end else begin
          stlist[c].push_back(st_g(g_next[c]));
          gmem[c][g_next[c]] = res; pend_gb.push_back(c); pend_ga.push_back(g_next[c]); g_next[c]++;
        end
      end
      left_ld -= int'(l0) + int'(l1);
      if (alu) left_alu--;
    end
  endtask

  task automatic build();
    int na, nb;
    for (int b = 0; b < NCU; b++)
      for (int a = 0; a < 16; a++) begin
        gmem[b][a] = $urandom;
        g_rd_bank.push_back(b); g_rd_addr.push_back(a);
      end
    for (int c = 0; c < NCU; c++) begin
      g_next[c] = 16; l_next[c] = 0;
      for (int r = 0; r < 32; r++) regs[c][r] = '0;
    end
    for (int s = 0; s < NSL; s++) begin
      for (int c = 0; c < NCU; c++) begin
        cprec[c] = prec_e'((s + c) % 3);
        na = $urandom_range(2, 8); nb = $urandom_range(1, 6);
        prog[c].push_back(ins_imm(OP_SET_LDSL, na));
        prog[c].push_back(ins_imm(OP_SET_PREC, int'(cprec[c])));
        gen_phase(c, na, $urandom_range(3, 10));
        prog[c].push_back(ins_imm(OP_LBARRIER, 0));
        foreach (pend_l[c][i]) l_rd[c].push_back(pend_l[c][i]);
        pend_l[c].delete();
        prog[c].push_back(ins_imm(OP_SET_LDSL, nb));
        gen_phase(c, nb, $urandom_range(2, 6));
        foreach (pend_l[c][i]) l_rd[c].push_back(pend_l[c][i]);
        pend_l[c].delete();
        prog[c].push_back(ins_imm(OP_GBARRIER, 0));
      end
      foreach (pend_gb[i]) begin g_rd_bank.push_back(pend_gb[i]); g_rd_addr.push_back(pend_ga[i]); end
      pend_gb.delete(); pend_ga.delete();
    end
  endtask

  // ---------------------------------------------------------------- host port
  task automatic hwrite(input host_sel_e sel, input int cu, input int addr, input logic [31:0] d);
    @(negedge clk);
    host_we = 1; host_sel = sel; host_cu = BW'(cu); host_addr = 16'(addr); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic hread(input int bank, input int addr, output logic [31:0] d);
    @(negedge clk);
    host_re = 1; host_sel = HSEL_GLOBAL; host_cu = BW'(bank); host_addr = 16'(addr);
    @(negedge clk);
    host_re = 0;
    @(negedge clk);
    d = host_rdata;
  endtask

  // ---------------------------------------------------------------- mechanism counters
  int n_ld_stall, n_pop2, n_st_full, n_lbar_wait, n_gbar_wait, n_go, n_conflict, n_st_block;
  int n_prec[3], n_lld, n_gld, n_lst, n_gst;
  logic running = 0, go_q = 0;
  logic [NCU-1:0] p_ldstall, p_pop2, p_stfull, p_lbw, p_gbw, p_alu, p_lld, p_gld, p_lst, p_gst;
  prec_e p_prec [NCU];

  for (genvar c = 0; c < NCU; c++) begin : g_probe
    assign p_ldstall[c] = dut.g_cu[c].u_cu.u_pe.run && dut.g_cu[c].u_cu.u_pe.ins_v &&
                          !dut.g_cu[c].u_cu.u_pe.done && !dut.g_cu[c].u_cu.u_pe.ld_ok;
    assign p_pop2[c]    = dut.g_cu[c].u_cu.u_pe.ldf_pop_cnt == 2'd2;
    assign p_stfull[c]  = dut.g_cu[c].u_cu.u_pe.ins_v && !dut.g_cu[c].u_cu.u_pe.st_ok;
    assign p_lbw[c]     = dut.g_cu[c].u_cu.u_pe.ins_v && dut.g_cu[c].u_cu.u_pe.ins.op == OP_LBARRIER &&
                          !dut.g_cu[c].u_cu.u_pe.cond_ok;
    assign p_gbw[c]     = dut.g_cu[c].u_cu.u_pe.ins_v && dut.g_cu[c].u_cu.u_pe.ins.op == OP_GBARRIER &&
                          !dut.g_cu[c].u_cu.u_pe.cond_ok;
    assign p_alu[c]     = dut.g_cu[c].u_cu.u_pe.exec && dut.g_cu[c].u_cu.u_pe.is_alu;
    assign p_prec[c]    = dut.g_cu[c].u_cu.u_pe.prec;
    assign p_lld[c]     = dut.g_cu[c].u_cu.lsp_re;
    assign p_gld[c]     = dut.gld_gnt[c];
    assign p_lst[c]     = dut.g_cu[c].u_cu.lsp_we;
    assign p_gst[c]     = dut.gst_req[c];
  end

  always @(posedge clk) if (running) begin
    n_ld_stall  += $countones(p_ldstall);
    n_pop2      += $countones(p_pop2);
    n_st_full   += $countones(p_stfull);
    n_lbar_wait += $countones(p_lbw);
    n_gbar_wait += $countones(p_gbw);
    n_lld       += $countones(p_lld);
    n_gld       += $countones(p_gld);
    n_lst       += $countones(p_lst);
    n_gst       += $countones(p_gst);
    for (int c = 0; c < NCU; c++) if (p_alu[c]) n_prec[int'(p_prec[c])]++;
    go_q <= dut.go;
    if (dut.go && !go_q && !done) n_go++;
    for (int b = 0; b < NCU; b++) begin
      if ($countones(dut.u_xbar.bank_req[b]) > 1) n_conflict++;
      if (dut.gst_req[b] && dut.u_xbar.bank_req[b] != '0) n_st_block++;
    end
  end

  initial begin
    for (int i = 0; i < 200; i++) begin repeat (1000) @(posedge clk); if (i % 20 == 0) begin $display("cycle %0d", i * 1000); $fflush; end end
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic count_mech(input string name, input int n);
    checks++;
    $display("mechanism %-22s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  initial begin
    int t0, cycles;
    logic [31:0] d;
    build();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NCU; b++)
      for (int a = 0; a < 16; a++) hwrite(HSEL_GLOBAL, b, a, gmem[b][a]);
    for (int c = 0; c < NCU; c++) begin
      foreach (prog[c][i])   hwrite(HSEL_IMEM, c, i, 32'(prog[c][i]));
      foreach (ldlist[c][i]) hwrite(HSEL_LDMEM, c, i, 32'(ldlist[c][i]));
      foreach (stlist[c][i]) hwrite(HSEL_STMEM, c, i, 32'(stlist[c][i]));
      hwrite(HSEL_PLEN, c, 0, prog[c].size());
    end
    @(negedge clk); start = 1; running = 1; t0 = $time;
    @(negedge clk); start = 0;
    wait (done);
    cycles = ($time - t0) / 10;
    @(negedge clk); running = 0;
    $display("program done after %0d cycles", cycles);
    for (int b = 0; b < NCU; b++)
      foreach (gmem[b][a]) begin
        hread(b, a, d);
        checks++;
        if (d !== gmem[b][a]) begin
          failures++;
          if (failures < 20) $display("FAIL bank %0d addr %0d: %h expected %h", b, a, d, gmem[b][a]);
        end
      end
    count_mech("load FIFO stall", n_ld_stall);
    count_mech("two-word pop", n_pop2);
    count_mech("local barrier wait", n_lbar_wait);
    count_mech("global barrier wait", n_gbar_wait);
    count_mech("global barrier", n_go);
    count_mech("bank conflict", n_conflict);
    count_mech("store blocks load", n_st_block);
    count_mech("alu 32b", n_prec[0]);
    count_mech("alu 16b", n_prec[1]);
    count_mech("alu 8b", n_prec[2]);
    count_mech("local load", n_lld);
    count_mech("global load", n_gld);
    count_mech("local store", n_lst);
    count_mech("global store", n_gst);
    checks++;
    if (n_go != NSL) begin failures++; $display("FAIL %0d global barriers, expected %0d", n_go, NSL); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

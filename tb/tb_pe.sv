// tb_pe: runs a short processing stream on the PE with a modelled instruction
// memory, a load FIFO fed by the testbench and a store FIFO it watches.
// Checks: results pushed to the store FIFO equal the posit reference model
// (32b, then 4x8b after set_precision), the PE stalls while a needed load word
// is missing, set_ld_stream_len waits for the previous stream and writes its
// immediate, a local barrier waits for st_idle, a global barrier raises arrive
// and waits for go, a full store FIFO stalls the PE, four independent
// instructions run in four cycles, and done rises after the program length.
module tb_pe;
  import dpu_pkg::*;
  import dpu_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [10:0] plen;
  logic im_re; logic [9:0] im_raddr; instr_t im_rdata;
  logic [2:0] ldf_count; ld_data_t ldf_data0, ldf_data1; logic [1:0] ldf_pop_cnt;
  logic stf_full, stf_push; logic [31:0] stf_wdata;
  logic st_idle, ld_rem_zero, ldsl_we; logic [14:0] ldsl_val;
  logic arrive, go, done;
  logic lpush; ld_data_t lwdata; logic lfull, lempty;
  logic [20:0] imem [1024];
  logic [31:0] stores [$];
  int checks = 0, failures = 0, ldsl_writes = 0, exec_cycles = 0;

  pe dut (.*);
  stream_fifo #(.DEPTH(4), .WIDTH(37)) u_ldf (.clk(clk), .rst_n(rst_n), .flush(start), .push(lpush), .wr_data(lwdata),
    .pop_cnt(ldf_pop_cnt), .rd_data0(ldf_data0), .rd_data1(ldf_data1), .count(ldf_count), .full(lfull), .empty(lempty));

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (im_re) im_rdata <= imem[im_raddr];
  always @(posedge clk) begin
    if (stf_push) stores.push_back(stf_wdata);
    if (ldsl_we) begin
      ldsl_writes++;
      checks++;
      if (ldsl_val != 15'd1234 || !ld_rem_zero) begin failures++; $display("FAIL set_ld_stream_len %0d", ldsl_val); end
    end
  end

  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic push_ld(input int dst, input logic [31:0] d);
    @(negedge clk); lpush = 1; lwdata.dst = 5'(dst); lwdata.data = d;
    @(negedge clk); lpush = 0;
  endtask

  initial begin
    logic [31:0] x1, x2, x3, x4, b1, b2;
    int n, t0;
    x1 = from_real(1.5, 32); x2 = from_real(-2.25, 32);
    b1 = {from_real(0.5, 8)[7:0], from_real(3.0, 8)[7:0], from_real(-1.0, 8)[7:0], from_real(0.125, 8)[7:0]};
    b2 = {from_real(0.75, 8)[7:0], from_real(-3.0, 8)[7:0], from_real(2.0, 8)[7:0], from_real(8.0, 8)[7:0]};
    n = 0;
    imem[n++] = ins_imm(OP_SET_LDSL, 1234);
    imem[n++] = ins_imm(OP_SET_PREC, 0, 1, 1);          // nop pulling r1, r2
    imem[n++] = ins(OP_ADD, 1, 2, 3, 0, 0, 1);          // r3 = r1 + r2 -> store
    imem[n++] = ins(OP_MUL, 3, 1, 4, 0, 0, 1);          // r4 = r3 * r1 -> store
    imem[n++] = ins(OP_MAX, 1, 2, 5, 0, 0, 1);
    imem[n++] = ins(OP_MIN, 1, 2, 6, 0, 0, 1);
    imem[n++] = ins_imm(OP_LBARRIER, 0);
    imem[n++] = ins_imm(OP_SET_PREC, 2, 1, 1);          // 4x8b, pull r7, r8
    imem[n++] = ins(OP_ADD, 7, 8, 9, 0, 0, 1);
    imem[n++] = ins(OP_MUL, 7, 8, 10, 0, 0, 1);
    imem[n++] = ins_imm(OP_GBARRIER, 0);
    imem[n++] = ins(OP_ADD, 9, 10, 11, 0, 0, 0);        // four independent ops
    imem[n++] = ins(OP_ADD, 9, 10, 12, 0, 0, 0);
    imem[n++] = ins(OP_ADD, 9, 10, 13, 0, 0, 0);
    imem[n++] = ins(OP_ADD, 9, 10, 14, 0, 0, 0);
    plen = 11'(n);
    lpush = 0; lwdata = '0; stf_full = 0; st_idle = 1; ld_rem_zero = 1; go = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // the PE must wait for its load words
    repeat (6) @(negedge clk);
    checks++;
    if (stores.size() != 0 || dut.pc > 4) begin failures++; $display("FAIL PE ran ahead without loads"); end
    push_ld(1, x1);
    stf_full = 1;                                       // store FIFO full: the add must wait
    push_ld(2, x2);
    repeat (4) @(negedge clk);
    checks++;
    if (stores.size() != 0) begin failures++; $display("FAIL store while store FIFO full"); end
    stf_full = 0;
    st_idle = 0;                                        // stores still running: local barrier waits
    repeat (8) @(negedge clk);
    checks++;
    if (stores.size() != 4 || dut.ins.op != OP_LBARRIER) begin failures++; $display("FAIL local barrier not waiting (%0d stores)", stores.size()); end
    st_idle = 1;
    push_ld(7, b1); push_ld(8, b2);
    repeat (6) @(negedge clk);
    checks++;
    if (!arrive || dut.ins.op != OP_GBARRIER) begin failures++; $display("FAIL no arrive at global barrier"); end
    go = 1; t0 = $time;
    @(negedge clk); go = 0;
    wait (done);
    checks++;
    if (($time - t0) / 10 > 5) begin failures++; $display("FAIL four ops took %0d cycles", ($time - t0) / 10); end
    x3 = ref_op(OP_ADD, PREC_32, x1, x2);
    x4 = ref_op(OP_MUL, PREC_32, x3, x1);
    begin
      logic [31:0] expv [6];
      expv = '{x3, x4, ref_op(OP_MAX, PREC_32, x1, x2), ref_op(OP_MIN, PREC_32, x1, x2),
               ref_op(OP_ADD, PREC_8, b1, b2), ref_op(OP_MUL, PREC_8, b1, b2)};
      for (int i = 0; i < 6; i++) begin
        checks++;
        if (i >= stores.size() || stores[i] !== expv[i]) begin failures++; $display("FAIL store %0d: %h exp %h", i, (i < stores.size()) ? stores[i] : 0, expv[i]); end
      end
    end
    checks++;
    if (ldsl_writes != 1) begin failures++; $display("FAIL %0d stream length writes", ldsl_writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

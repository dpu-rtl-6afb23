// tb_load_streaming_unit: the unit is connected to a modelled load address
// memory, local scratchpad and global port (grants given at random) and to a
// real stream FIFO that is drained at random. A stream of 40 loads (mixed
// local/global) is released in segments through the stream length register.
// Checks: the words arrive in program order with the right destination
// register and data, exactly the programmed number of loads is issued per
// segment (the unit stops at the end of a segment), and with the FIFO drained
// every cycle and grants always given, 8 back-to-back loads take at most
// 8 + 3 cycles (one load per cycle).
module tb_load_streaming_unit;
  import dpu_pkg::*;
  import dpu_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic am_re; logic [9:0] am_raddr; ld_entry_t am_rdata;
  logic ldsl_we; logic [14:0] ldsl_val; logic ld_rem_zero;
  logic lsp_re; logic [8:0] lsp_raddr; logic [31:0] lsp_rdata;
  logic gld_req, gld_gnt; logic [5:0] gld_bank; logic [9:0] gld_addr; logic [31:0] gld_rdata;
  logic [2:0] fifo_count; logic fifo_push; ld_data_t fifo_wdata, d0, d1;
  logic [1:0] pop_cnt; logic ffull, fempty;
  logic [21:0] amem [1024];
  int checks = 0, failures = 0, nrecv = 0, grant_rate = 2;
  bit always_pop = 0;

  load_streaming_unit dut (.*);
  stream_fifo #(.DEPTH(4), .WIDTH(37)) u_fifo (.clk(clk), .rst_n(rst_n), .flush(start), .push(fifo_push),
    .wr_data(fifo_wdata), .pop_cnt(pop_cnt), .rd_data0(d0), .rd_data1(d1), .count(fifo_count), .full(ffull), .empty(fempty));

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    if (am_re) am_rdata <= amem[am_raddr];
    if (lsp_re) lsp_rdata <= {8'hAA, 15'(lsp_raddr), 9'(lsp_raddr)};
    if (gld_req && gld_gnt) gld_rdata <= {2'b01, gld_bank, 14'(gld_addr), 10'(gld_addr)};
  end
  assign gld_gnt = gld_req && ($urandom_range(0, grant_rate) != 0);

  function automatic ld_data_t expect_of(input int i);
    ld_entry_t e; ld_data_t d;
    e = amem[i];
    d.dst = e.dst;
    d.data = e.global_sel ? {2'b01, e.bank, 14'(e.addr), 10'(e.addr)} : {8'hAA, 15'(e.addr[8:0]), 9'(e.addr[8:0])};
    return d;
  endfunction

  // consumer: pops 0..2 entries at random and checks them in order
  always @(negedge clk) begin
    int n;
    if (rst_n) begin
      n = always_pop ? int'(fifo_count) : $urandom_range(0, 2);
      if (n > int'(fifo_count)) n = int'(fifo_count);
      if (n > 2) n = 2;
      pop_cnt = 2'(n);
      for (int i = 0; i < n; i++) begin
        ld_data_t got;
        got = (i == 0) ? d0 : d1;
        checks++;
        if (got !== expect_of(nrecv)) begin failures++; $display("FAIL load %0d: %h exp %h", nrecv, got, expect_of(nrecv)); end
        nrecv++;
      end
    end else pop_cnt = 0;
  end

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run_segment(input int len, input int expect_total);
    @(negedge clk); ldsl_we = 1; ldsl_val = 15'(len);
    @(negedge clk); ldsl_we = 0;
    repeat (200) @(posedge clk);
    checks++;
    if (nrecv != expect_total || !ld_rem_zero) begin failures++; $display("FAIL segment: received %0d exp %0d", nrecv, expect_total); end
  endtask

  initial begin
    int t0, t1;
    ldsl_we = 0; ldsl_val = 0; pop_cnt = 0;
    for (int i = 0; i < 1024; i++)
      amem[i] = ($urandom_range(0, 1) != 0) ? ld_g($urandom_range(0, 63), $urandom_range(0, 1023), $urandom_range(0, 31))
                                            : ld_l($urandom_range(0, 511), $urandom_range(0, 31));
    for (int i = 40; i < 48; i++) amem[i] = ld_l(i, i % 32);
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    run_segment(5, 5);
    run_segment(1, 6);
    run_segment(20, 26);
    run_segment(14, 40);
    // throughput: 8 local loads, FIFO drained every cycle
    always_pop = 1; grant_rate = 1000;
    @(negedge clk); ldsl_we = 1; ldsl_val = 15'd8; t0 = $time;
    @(negedge clk); ldsl_we = 0;
    wait (nrecv == 48); t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 8 + 3) begin failures++; $display("FAIL 8 loads took %0d cycles", (t1 - t0) / 10); end
    $display("8 back-to-back loads in %0d cycles", (t1 - t0) / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

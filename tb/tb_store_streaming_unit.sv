// tb_store_streaming_unit: a producer pushes 60 random words into a real
// store FIFO at random moments; the unit must write each word, in order, to
// the local scratchpad or the own global bank named by the next store address
// entry (modelled memory). Checks every write (port, address, data), that
// st_idle is high only when all pushed words are written, and that 8 words
// already waiting in a burst are written at one per cycle.
module tb_store_streaming_unit;
  import dpu_pkg::*;
  import dpu_tb_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic am_re; logic [9:0] am_raddr; st_entry_t am_rdata;
  logic fifo_empty, fifo_pop; logic [31:0] fifo_rdata, d1;
  logic lsp_we; logic [8:0] lsp_waddr; logic [31:0] lsp_wdata;
  logic gst_req; logic [9:0] gst_addr; logic [31:0] gst_wdata; logic st_idle;
  logic push; logic [31:0] wdata; logic [2:0] cnt; logic ffull;
  logic [10:0] amem [1024];
  logic [31:0] sent [$];
  int checks = 0, failures = 0, nwr = 0, npushed = 0;

  store_streaming_unit dut (.*);
  stream_fifo #(.DEPTH(4), .WIDTH(32)) u_fifo (.clk(clk), .rst_n(rst_n), .flush(start), .push(push),
    .wr_data(wdata), .pop_cnt({1'b0, fifo_pop}), .rd_data0(fifo_rdata), .rd_data1(d1), .count(cnt), .full(ffull), .empty(fifo_empty));

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (am_re) am_rdata <= amem[am_raddr];

  always @(negedge clk) begin
    if (rst_n) begin
      st_entry_t e;
      if (lsp_we || gst_req) begin
        e = amem[nwr];
        checks++;
        if ((lsp_we && gst_req) || (gst_req != e.global_sel) ||
            (gst_req && (gst_addr != e.addr || gst_wdata != sent[nwr])) ||
            (lsp_we && (lsp_waddr != e.addr[8:0] || lsp_wdata != sent[nwr]))) begin
          failures++; $display("FAIL store %0d", nwr);
        end
        nwr++;
      end
    end
  end

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int t0;
    push = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) amem[i] = ($urandom_range(0, 1) != 0) ? st_g($urandom_range(0, 1023)) : st_l($urandom_range(0, 511));
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 60; i++) begin
      @(negedge clk);
      while (ffull) @(negedge clk);
      push = 1; wdata = $urandom; sent.push_back(wdata); npushed++;
      @(posedge clk); #1; push = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (nwr != 60 || !st_idle) begin failures++; $display("FAIL %0d of 60 written, idle=%b", nwr, st_idle); end
    // burst: fill the FIFO (4) while checking idle drops, measure drain rate
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      push = !ffull; wdata = $urandom;
      if (push) sent.push_back(wdata);
      @(posedge clk); #1; push = 0;
      checks++;
      if (st_idle && nwr < sent.size() - 1) begin failures++; $display("FAIL idle while words wait"); end
    end
    t0 = nwr;
    repeat (3) @(negedge clk);
    checks++;
    if (nwr != sent.size()) begin failures++; $display("FAIL drain: %0d of %0d", nwr, sent.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

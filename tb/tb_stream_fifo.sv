// tb_stream_fifo: random pushes and 0/1/2-entry pops, respecting full and
// count, against a queue model; checks both read ports, count, full and empty.
module tb_stream_fifo;
  logic clk = 0, rst_n = 0, flush = 0, push, full, empty; logic [36:0] wr_data, rd_data0, rd_data1;
  logic [1:0] pop_cnt; logic [2:0] count;
  logic [36:0] q[$];
  int checks = 0, failures = 0;
  stream_fifo #(.DEPTH(4), .WIDTH(37)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    push = 0; pop_cnt = 0; wr_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != q.size() || full != (q.size() == 4) || empty != (q.size() == 0)) begin
        failures++; $display("FAIL count %0d exp %0d", count, q.size());
      end
      if (q.size() >= 1) begin checks++; if (rd_data0 !== q[0]) begin failures++; $display("FAIL head"); end end
      if (q.size() >= 2) begin checks++; if (rd_data1 !== q[1]) begin failures++; $display("FAIL second"); end end
      push = (q.size() < 4) && $urandom_range(0, 2) != 0;
      wr_data = {$urandom, 5'($urandom)};
      pop_cnt = 2'($urandom_range(0, (q.size() < 2) ? q.size() : 2));
      @(posedge clk);
      for (int i = 0; i < int'(pop_cnt); i++) void'(q.pop_front());
      if (push) q.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

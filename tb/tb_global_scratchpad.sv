// tb_global_scratchpad: each of the 64 banks is written with a pattern that
// names the bank and the address, then all banks are read in parallel and the
// words checked, so a bank wired to the wrong port or address is caught.
module tb_global_scratchpad;
  logic clk = 0; logic [63:0] we, re; logic [63:0][9:0] addr; logic [63:0][31:0] wdata, rdata;
  int checks = 0, failures = 0;
  global_scratchpad dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    we = 0; re = 0; addr = 0; wdata = 0;
    for (int a = 0; a < 40; a++) begin
      @(negedge clk);
      we = '1; re = 0;
      for (int b = 0; b < 64; b++) begin addr[b] = 10'(a * 25 + b); wdata[b] = {8'(b), 14'(a), 10'(a * 25 + b)}; end
    end
    for (int a = 0; a < 40; a++) begin
      @(negedge clk);
      we = 0; re = '1;
      for (int b = 0; b < 64; b++) addr[b] = 10'(a * 25 + b);
      @(posedge clk); #1;
      for (int b = 0; b < 64; b++) begin
        checks++;
        if (rdata[b] !== {8'(b), 14'(a), 10'(a * 25 + b)}) begin failures++; $display("FAIL bank %0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

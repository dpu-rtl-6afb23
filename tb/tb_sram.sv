// tb_sram: writes random words to random addresses, reads them back one cycle
// later and checks them against a copy kept in the testbench; also checks that
// a same-cycle read of a written address returns the old word.
module tb_sram;
  logic clk = 0, we, re; logic [9:0] waddr, raddr; logic [31:0] wdata, rdata;
  logic [31:0] model [1024];
  bit valid [1024];
  int checks = 0, failures = 0;
  sram #(.DEPTH(1024), .WIDTH(32)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int t = 0; t < 4000; t++) begin
      logic [31:0] expd; bit chk;
      @(negedge clk);
      we = $urandom_range(0, 1); waddr = 10'($urandom); wdata = $urandom;
      re = 1; raddr = (t % 3 == 0) ? waddr : 10'($urandom);
      chk = valid[raddr]; expd = model[raddr];
      @(posedge clk); #1;
      if (we) begin model[waddr] = wdata; valid[waddr] = 1; end
      if (chk) begin
        checks++;
        if (rdata !== expd) begin failures++; $display("FAIL addr %0d: %h exp %h", raddr, rdata, expd); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

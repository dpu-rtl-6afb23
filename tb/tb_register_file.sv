// tb_register_file: random writes on the three write ports (always to
// different registers, as the compiler guarantees) and random reads on both
// read ports, checked against a register array kept in the testbench.
module tb_register_file;
  logic clk = 0, rst_n = 0; logic [2:0] we; logic [2:0][4:0] waddr; logic [2:0][31:0] wdata;
  logic [4:0] raddr0, raddr1; logic [31:0] rdata0, rdata1;
  logic [31:0] model [32];
  int checks = 0, failures = 0;
  register_file dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    we = 0; waddr = 0; wdata = 0; raddr0 = 0; raddr1 = 0;
    for (int r = 0; r < 32; r++) model[r] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      raddr0 = 5'($urandom); raddr1 = 5'($urandom);
      #1;
      checks += 2;
      if (rdata0 !== model[raddr0] || rdata1 !== model[raddr1]) begin failures++; $display("FAIL read"); end
      we = 3'($urandom);
      waddr[0] = 5'($urandom); waddr[1] = waddr[0] + 5'd1 + 5'($urandom_range(0, 10)); waddr[2] = waddr[1] + 5'd1 + 5'($urandom_range(0, 10));
      for (int p = 0; p < 3; p++) wdata[p] = $urandom;
      @(posedge clk);
      for (int p = 0; p < 3; p++) if (we[p]) model[waddr[p]] = wdata[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

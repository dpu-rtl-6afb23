// tb_ps_barrel_shifter: random per-lane left shifts in all three modes,
// compared with shifts of each lane computed in the testbench (zeros must
// enter at the bottom of every lane, nothing may cross into the next lane).
module tb_ps_barrel_shifter;
  import dpu_pkg::*;
  prec_e prec; logic [31:0] x, y; logic [3:0][4:0] sh;
  int checks = 0, failures = 0;
  ps_barrel_shifter dut (.prec(prec), .x(x), .sh(sh), .y(y));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int n, lanes; logic [31:0] e, m;
      prec = prec_e'(t % 3); x = $urandom;
      n = (prec == PREC_32) ? 32 : (prec == PREC_16) ? 16 : 8; lanes = 32 / n;
      for (int i = 0; i < 4; i++) sh[i] = 5'($urandom % n);
      #1;
      m = (n == 32) ? 32'hFFFF_FFFF : (32'h1 << n) - 1;
      e = 0;
      for (int l = 0; l < lanes; l++) e |= ((((x >> (n*l)) & m) << sh[n*l/8]) & m) << (n*l);
      checks++;
      if (y !== e) begin failures++; $display("FAIL %s x=%h y=%h exp %h", prec.name(), x, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

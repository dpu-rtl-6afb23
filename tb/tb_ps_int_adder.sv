// tb_ps_int_adder: random test of the precision-scalable adder in all three
// modes against lane-by-lane sums computed in the testbench, including the
// per-lane carry in and carry out.
module tb_ps_int_adder;
  import dpu_pkg::*;
  prec_e prec; logic [31:0] a, b, sum; logic [3:0] cin, cout;
  int checks = 0, failures = 0;
  ps_int_adder dut (.prec(prec), .a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int n, lanes; logic [31:0] exp_s; logic [3:0] exp_c;
      prec = prec_e'(t % 3); a = $urandom; b = $urandom; cin = 4'($urandom);
      n = (prec == PREC_32) ? 32 : (prec == PREC_16) ? 16 : 8; lanes = 32 / n;
      #1;
      exp_s = 0; exp_c = 0;
      for (int l = 0; l < lanes; l++) begin
        logic [32:0] s; logic [31:0] m;
        m = (n == 32) ? 32'hFFFF_FFFF : (32'h1 << n) - 1;
        s = 33'((a >> (n*l)) & m) + 33'((b >> (n*l)) & m) + 33'(cin[l*n/8]);
        exp_s |= (s[31:0] & m) << (n*l);
        exp_c[(l*n + n)/8 - 1] = s[n];
      end
      checks++;
      if (sum !== exp_s) begin failures++; $display("FAIL sum %s %h+%h = %h exp %h", prec.name(), a, b, sum, exp_s); end
      for (int l = 0; l < lanes; l++) begin
        checks++;
        if (cout[(l*n + n)/8 - 1] !== exp_c[(l*n + n)/8 - 1]) begin failures++; $display("FAIL cout"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

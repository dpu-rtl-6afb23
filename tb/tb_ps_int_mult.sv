// tb_ps_int_mult: random test of the precision-scalable multiplier in all
// three modes against products computed lane by lane in the testbench.
module tb_ps_int_mult;
  import dpu_pkg::*;
  prec_e prec; logic [31:0] a, b; logic [63:0] p;
  int checks = 0, failures = 0;
  ps_int_mult dut (.prec(prec), .a(a), .b(b), .p(p));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [63:0] e;
      prec = prec_e'(t % 3); a = $urandom; b = $urandom;
      if (t < 6) begin a = 32'hFFFF_FFFF; b = 32'hFFFF_FFFF; end
      #1;
      unique case (prec)
        PREC_32: e = 64'(a) * 64'(b);
        PREC_16: e = {32'(a[31:16]) * 32'(b[31:16]), 32'(a[15:0]) * 32'(b[15:0])};
        default: e = {16'(a[31:24]) * 16'(b[31:24]), 16'(a[23:16]) * 16'(b[23:16]),
                      16'(a[15:8]) * 16'(b[15:8]), 16'(a[7:0]) * 16'(b[7:0])};
      endcase
      checks++;
      if (p !== e) begin failures++; $display("FAIL %s %h*%h = %h exp %h", prec.name(), a, b, p, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

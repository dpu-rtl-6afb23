// tb_ps_prio_enc: checks the leading-zero counts and all-zero flags of every
// lane in all three modes against a bit scan done in the testbench. Inputs are
// random words with random leading-zero runs, plus all-zero words.
module tb_ps_prio_enc;
  import dpu_pkg::*;
  prec_e prec; logic [31:0] x; logic [3:0][4:0] cnt; logic [3:0] zero;
  int checks = 0, failures = 0;
  ps_prio_enc dut (.prec(prec), .x(x), .cnt(cnt), .zero(zero));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 3000; t++) begin
      int n, lanes;
      prec = prec_e'(t % 3);
      x = $urandom >> ($urandom % 33);
      if (t % 7 == 0) x = 0;
      if (t % 5 == 0) x = x & 32'h00FF_00F0;
      n = (prec == PREC_32) ? 32 : (prec == PREC_16) ? 16 : 8; lanes = 32 / n;
      #1;
      for (int l = 0; l < lanes; l++) begin
        int lz; bit z; int idx;
        lz = 0; z = 1;
        for (int j = n - 1; j >= 0; j--) begin
          if (x[n*l + j]) begin z = 0; break; end
          lz++;
        end
        idx = n * l / 8;
        checks++;
        if (zero[idx] !== z || (!z && int'(cnt[idx]) != lz)) begin
          failures++; $display("FAIL %s x=%h lane %0d cnt=%0d zero=%b exp %0d %b", prec.name(), x, l, cnt[idx], zero[idx], lz, z);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

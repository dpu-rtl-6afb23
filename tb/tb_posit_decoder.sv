// tb_posit_decoder: decodes random words in all three precisions and compares
// sign, zero flag, regime value, exponent and fraction of every lane with a
// bit-serial decoder written in the testbench from the format definition.
module tb_posit_decoder;
  import dpu_pkg::*;
  prec_e prec; logic [31:0] x, ef; logic [3:0] sign, zero; logic [3:0][5:0] k;
  int checks = 0, failures = 0;
  posit_decoder dut (.prec(prec), .x(x), .sign(sign), .zero(zero), .k(k), .ef(ef));
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 4000; t++) begin
      int n, lanes, es;
      prec = prec_e'(t % 3); x = $urandom;
      if (t % 11 == 0) x = $urandom >> ($urandom % 32);
      if (t % 13 == 0) x = ~($urandom >> ($urandom % 32));
      n = (prec == PREC_32) ? 32 : (prec == PREC_16) ? 16 : 8; lanes = 32 / n;
      es = posit_es(n);
      #1;
      for (int l = 0; l < lanes; l++) begin
        int i, run, kk, idx; bit r0, z; logic [31:0] efe, m;
        idx = n * l / 8;
        m = (n == 32) ? 32'hFFFF_FFFF : (32'h1 << n) - 1;
        z = (((x >> (n*l)) & (m >> 1)) == 0);
        i = n - 2; r0 = x[n*l + i]; run = 0;
        while (i >= 0 && x[n*l + i] == r0) begin run++; i--; end
        i--;
        kk = r0 ? run - 1 : -run;
        // remaining bits (exponent then fraction), left aligned in the lane
        efe = 0;
        for (int j = n - 1; j >= 0 && i >= 0; j--) begin efe[j] = x[n*l + i]; i--; end
        checks++;
        if (zero[idx] !== z || sign[idx] !== x[n*l + n - 1] ||
            (!z && ($signed(k[idx]) != kk || ((ef >> (n*l)) & m) != efe))) begin
          failures++;
          $display("FAIL %s x=%h lane %0d: k=%0d ef=%h z=%b exp k=%0d ef=%h z=%b", prec.name(), x, l,
                   $signed(k[idx]), (ef >> (n*l)) & m, zero[idx], kk, efe, z);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

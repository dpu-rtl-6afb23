// tb_posit_unit: self-checking test of the precision-scalable posit unit.
//
// The reference model decodes posits by scanning their bits, computes the
// exact result as (sign, binary scale, mantissa in [1,2)) with real numbers,
// and re-encodes it by writing out the regime, exponent and fraction bits and
// rounding to nearest-even on the bit string, with the saturation rules of the
// format (clamp to the largest / smallest posit). It shares no code with the
// RTL. Random operands are tried in all three precisions and all four
// operations, plus zero, saturation and cancellation corner cases. 32b
// operands are limited to |scale| <= 480 so that the real arithmetic of the
// model cannot overflow.
module tb_posit_unit;
  import dpu_pkg::*;

  opcode_e     op;
  prec_e       prec;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  posit_unit dut (.op(op), .prec(prec), .a(a), .b(b), .y(y));

  // ---------------------------------------------------------------- model
  typedef struct {
    bit  sgn;
    bit  zero;
    int  scale;
    real m;
  } pval_t;

  function automatic pval_t pdecode(input logic [31:0] code, input int n, input int es);
    pval_t v;
    int i, run, k, e, nexp;
    bit r0;
    real f, w;
    v.sgn = code[n-1];
    v.zero = 0;
    v.m = 1.0;
    if ((code & ((32'h1 << (n-1)) - 1)) == 0) begin
      v.zero = 1; v.scale = 0; return v;
    end
    i = n - 2;
    r0 = code[i];
    run = 0;
    while (i >= 0 && code[i] == r0) begin run++; i--; end
    i--;                                   // skip terminator (if any)
    k = r0 ? run - 1 : -run;
    e = 0; nexp = 0;
    while (nexp < es) begin
      e = e * 2 + ((i >= 0) ? int'(code[i]) : 0);
      i--; nexp++;
    end
    f = 0.0; w = 0.5;
    while (i >= 0) begin
      if (code[i]) f += w;
      w /= 2.0; i--;
    end
    v.scale = k * (1 << es) + e;
    v.m = 1.0 + f;
    return v;
  endfunction

  function automatic logic [31:0] pencode(input bit sgn, input int scale, input real m,
                                          input int n, input int es);
    bit bits[200];
    int nb, k, e, run, j;
    bit guard, stk;
    logic [31:0] body, maxb;
    real fr;
    while (m >= 2.0) begin m /= 2.0; scale++; end
    while (m < 1.0)  begin m *= 2.0; scale--; end
    k = (scale >= 0) ? scale / (1 << es) : -((-scale + (1 << es) - 1) / (1 << es));
    e = scale - k * (1 << es);
    maxb = (32'h1 << (n-1)) - 1;
    if (k > n - 2) return (32'(sgn) << (n-1)) | maxb;
    if (k < -(n - 2)) return (32'(sgn) << (n-1)) | 32'h1;
    nb = 0;
    run = (k >= 0) ? k + 1 : -k;
    for (j = 0; j < run; j++) bits[nb++] = (k >= 0);
    bits[nb++] = (k < 0);
    for (j = es - 1; j >= 0; j--) bits[nb++] = e[j];
    fr = m - 1.0;
    for (j = 0; j < 60; j++) begin
      fr *= 2.0;
      if (fr >= 1.0) begin bits[nb++] = 1; fr -= 1.0; end
      else bits[nb++] = 0;
    end
    body = 0;
    for (j = 0; j < n - 1; j++) body = (body << 1) | 32'(bits[j]);
    guard = bits[n-1];
    stk = (fr != 0.0);
    for (j = n; j < nb; j++) stk |= bits[j];
    if (guard && (stk || body[0]) && body != maxb) body++;
    return (32'(sgn) << (n-1)) | body;
  endfunction

  function automatic real pval_real(input pval_t v);
    if (v.zero) return 0.0;
    return (v.sgn ? -1.0 : 1.0) * v.m * (2.0 ** v.scale);
  endfunction

  function automatic logic [31:0] ref_lane(input opcode_e o, input logic [31:0] ca,
                                           input logic [31:0] cb, input int n, input int es);
    pval_t va, vb;
    real ra, rb, s;
    int d;
    va = pdecode(ca, n, es);
    vb = pdecode(cb, n, es);
    unique case (o)
      OP_MUL: begin
        if (va.zero || vb.zero) return 0;
        return pencode(va.sgn ^ vb.sgn, va.scale + vb.scale, va.m * vb.m, n, es);
      end
      OP_ADD: begin
        if (va.zero) return cb;
        if (vb.zero) return ca;
        // sum relative to the scale of a
        d = vb.scale - va.scale;
        s = (va.sgn ? -va.m : va.m) + (vb.sgn ? -vb.m : vb.m) * (2.0 ** d);
        if (s == 0.0) return 0;
        return pencode(s < 0.0, va.scale, (s < 0.0) ? -s : s, n, es);
      end
      OP_MAX: begin
        ra = pval_real(va); rb = pval_real(vb);
        return (ra >= rb) ? ca : cb;
      end
      default: begin
        ra = pval_real(va); rb = pval_real(vb);
        return (ra >= rb) ? cb : ca;
      end
    endcase
  endfunction

  // ---------------------------------------------------------------- driver
  function automatic int width_of(input prec_e p);
    return (p == PREC_32) ? 32 : (p == PREC_16) ? 16 : 8;
  endfunction

  task automatic check(input opcode_e o, input prec_e p, input logic [31:0] xa, input logic [31:0] xb);
    int n, es, lanes;
    logic [31:0] exp_y, mask, la, lb, ly;
    n = width_of(p);
    es = posit_es(n);
    lanes = 32 / n;
    mask = (n == 32) ? 32'hFFFF_FFFF : ((32'h1 << n) - 1);
    op = o; prec = p; a = xa; b = xb;
    #1;
    exp_y = 0;
    for (int l = 0; l < lanes; l++) begin
      la = (xa >> (n*l)) & mask;
      lb = (xb >> (n*l)) & mask;
      exp_y |= (ref_lane(o, la, lb, n, es) & mask) << (n*l);
    end
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 20)
        $display("FAIL op=%s prec=%s a=%h b=%h y=%h expected=%h", o.name(), p.name(), xa, xb, y, exp_y);
    end
  endtask

  function automatic logic [31:0] rand32_limited();
    logic [31:0] c;
    pval_t v;
    do begin
      c = $urandom;
      v = pdecode(c, 32, 6);
    end while (!v.zero && (v.scale > 480 || v.scale < -480));
    return c;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    opcode_e ops[4] = '{OP_ADD, OP_MUL, OP_MAX, OP_MIN};
    // directed 8b: 1.0 = 0x40 (k=0, e=0); 1.0+1.0 = 2.0 = 0x48
    check(OP_ADD, PREC_8, 32'h40404040, 32'h40404040);
    if (y !== 32'h48484848) begin failures++; $display("FAIL 1+1 != 2 in 8b: %h", y); end
    checks++;
    // saturation: maxpos*maxpos stays maxpos, minpos*minpos stays minpos, x + (-x) = 0
    check(OP_MUL, PREC_8,  32'h7F7F0101, 32'h7F7F0101);
    check(OP_MUL, PREC_16, 32'h7FFF0001, 32'h7FFF0001);
    check(OP_ADD, PREC_16, 32'h4abcC123, 32'hCabc4123);
    check(OP_ADD, PREC_32, 32'h40000000, 32'hC0000000);
    check(OP_MUL, PREC_32, 32'h00000000, 32'h41234567);
    // exhaustive-ish 8b: all pairs for one lane pattern
    for (int i = 0; i < 256; i += 3)
      for (int j = 0; j < 256; j += 5)
        for (int o = 0; o < 4; o++)
          check(ops[o], PREC_8, {8'(i), 8'(j), 8'(i+j), 8'(i^j)}, {8'(j), 8'(i), 8'(255-i), 8'(j+7)});
    for (int t = 0; t < 3000; t++)
      for (int o = 0; o < 4; o++)
        check(ops[o], PREC_16, $urandom, $urandom);
    for (int t = 0; t < 3000; t++)
      for (int o = 0; o < 4; o++)
        check(ops[o], PREC_32, rand32_limited(), rand32_limited());
    // near-cancellation in 32b
    for (int t = 0; t < 500; t++) begin
      logic [31:0] x;
      x = rand32_limited();
      check(OP_ADD, PREC_32, x, {~x[31], x[30:2], 2'($urandom)});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// dpu_tb_pkg: testbench helpers for the DPU: an instruction and address-entry
// assembler and a reference model of the custom posit arithmetic written from
// the number format (bit-by-bit decode, real arithmetic, re-encode with
// round-to-nearest-even on the bit string and saturation to the largest and
// smallest posit). It shares no code with the RTL.
package dpu_tb_pkg;
  import dpu_pkg::*;

  // ---------------------------------------------------------------- assembler
  function automatic logic [20:0] ins(input opcode_e op, input int s1, input int s2, input int d,
                                      input bit ld0 = 0, input bit ld1 = 0, input bit st = 0);
    instr_t i;
    i.op = op; i.src1 = 5'(s1); i.src2 = 5'(s2); i.dst = 5'(d);
    i.ld0 = ld0; i.ld1 = ld1; i.st = st;
    return i;
  endfunction
  function automatic logic [20:0] ins_imm(input opcode_e op, input int imm,
                                          input bit ld0 = 0, input bit ld1 = 0);
    return ins(op, (imm >> 10) & 31, (imm >> 5) & 31, imm & 31, ld0, ld1, 0);
  endfunction
  function automatic logic [21:0] ld_g(input int bank, input int addr, input int dst);
    ld_entry_t e; e.global_sel = 1; e.bank = 6'(bank); e.addr = 10'(addr); e.dst = 5'(dst); return e;
  endfunction
  function automatic logic [21:0] ld_l(input int addr, input int dst);
    ld_entry_t e; e.global_sel = 0; e.bank = 0; e.addr = 10'(addr); e.dst = 5'(dst); return e;
  endfunction
  function automatic logic [10:0] st_g(input int addr);
    st_entry_t e; e.global_sel = 1; e.addr = 10'(addr); return e;
  endfunction
  function automatic logic [10:0] st_l(input int addr);
    st_entry_t e; e.global_sel = 0; e.addr = 10'(addr); return e;
  endfunction

  // ---------------------------------------------------------------- posit reference
  typedef struct {
    bit  sgn;
    bit  zero;
    int  scale;
    real m;
  } pval_t;

  function automatic pval_t pdecode(input logic [31:0] code, input int n);
    pval_t v;
    int i, run, k, e, nexp, es;
    bit r0;
    real f, w;
    es = posit_es(n);
    v.sgn = code[n-1]; v.zero = 0; v.m = 1.0; v.scale = 0;
    if ((code & ((32'h1 << (n-1)) - 1)) == 0) begin v.zero = 1; return v; end
    i = n - 2; r0 = code[i]; run = 0;
    while (i >= 0 && code[i] == r0) begin run++; i--; end
    i--;
    k = r0 ? run - 1 : -run;
    e = 0; nexp = 0;
    while (nexp < es) begin e = e * 2 + ((i >= 0) ? int'(code[i]) : 0); i--; nexp++; end
    f = 0.0; w = 0.5;
    while (i >= 0) begin if (code[i]) f += w; w /= 2.0; i--; end
    v.scale = k * (1 << es) + e;
    v.m = 1.0 + f;
    return v;
  endfunction

  function automatic logic [31:0] pencode(input bit sgn, input int scale, input real m, input int n);
    bit bits[200];
    int nb, k, e, run, es;
    bit guard, stk;
    logic [31:0] body, maxb;
    real fr;
    es = posit_es(n);
    while (m >= 2.0) begin m /= 2.0; scale++; end
    while (m < 1.0)  begin m *= 2.0; scale--; end
    k = (scale >= 0) ? scale / (1 << es) : -((-scale + (1 << es) - 1) / (1 << es));
    e = scale - k * (1 << es);
    maxb = (32'h1 << (n-1)) - 1;
    if (k > n - 2) return (32'(sgn) << (n-1)) | maxb;
    if (k < -(n - 2)) return (32'(sgn) << (n-1)) | 32'h1;
    nb = 0;
    run = (k >= 0) ? k + 1 : -k;
    for (int j = 0; j < run; j++) bits[nb++] = (k >= 0);
    bits[nb++] = (k < 0);
    for (int j = es - 1; j >= 0; j--) bits[nb++] = e[j];
    fr = m - 1.0;
    for (int j = 0; j < 60; j++) begin
      fr *= 2.0;
      if (fr >= 1.0) begin bits[nb++] = 1; fr -= 1.0; end else bits[nb++] = 0;
    end
    body = 0;
    for (int j = 0; j < n - 1; j++) body = (body << 1) | 32'(bits[j]);
    guard = bits[n-1];
    stk = (fr != 0.0);
    for (int j = n; j < nb; j++) stk |= bits[j];
    if (guard && (stk || body[0]) && body != maxb) body++;
    return (32'(sgn) << (n-1)) | body;
  endfunction

  // real value -> posit of n bits
  function automatic logic [31:0] from_real(input real x, input int n);
    if (x == 0.0) return 0;
    return pencode(x < 0.0, 0, (x < 0.0) ? -x : x, n);
  endfunction

  function automatic real pval_real(input pval_t v);
    if (v.zero) return 0.0;
    return (v.sgn ? -1.0 : 1.0) * v.m * (2.0 ** v.scale);
  endfunction

  // a >= b, compared on sign, scale and mantissa (no real overflow for 32b)
  function automatic bit pval_ge(input pval_t a, input pval_t b);
    bit mag_ab, mag_ba;
    mag_ab = (a.scale != b.scale) ? (a.scale > b.scale) : (a.m >= b.m);
    mag_ba = (a.scale != b.scale) ? (b.scale > a.scale) : (b.m >= a.m);
    if (a.zero && b.zero) return 1;
    if (a.zero) return b.sgn;
    if (b.zero) return !a.sgn;
    if (a.sgn != b.sgn) return !a.sgn;
    return a.sgn ? mag_ba : mag_ab;
  endfunction

  function automatic logic [31:0] ref_lane(input opcode_e o, input logic [31:0] ca,
                                           input logic [31:0] cb, input int n);
    pval_t va, vb;
    real s;
    va = pdecode(ca, n);
    vb = pdecode(cb, n);
    unique case (o)
      OP_MUL: begin
        if (va.zero || vb.zero) return 0;
        return pencode(va.sgn ^ vb.sgn, va.scale + vb.scale, va.m * vb.m, n);
      end
      OP_ADD: begin
        if (va.zero) return cb;
        if (vb.zero) return ca;
        // one operand below half an ulp of the other: the result is the other
        if (vb.scale - va.scale > 100) return cb;
        if (va.scale - vb.scale > 100) return ca;
        s = (va.sgn ? -va.m : va.m) + (vb.sgn ? -vb.m : vb.m) * (2.0 ** (vb.scale - va.scale));
        if (s == 0.0) return 0;
        return pencode(s < 0.0, va.scale, (s < 0.0) ? -s : s, n);
      end
      OP_MAX:  return pval_ge(va, vb) ? ca : cb;
      default: return pval_ge(va, vb) ? cb : ca;
    endcase
  endfunction

  // whole 32b word, lane by lane
  function automatic logic [31:0] ref_op(input opcode_e o, input prec_e p,
                                         input logic [31:0] a, input logic [31:0] b);
    int n;
    logic [31:0] r, m;
    n = (p == PREC_32) ? 32 : (p == PREC_16) ? 16 : 8;
    m = (n == 32) ? 32'hFFFF_FFFF : (32'h1 << n) - 1;
    r = 0;
    for (int l = 0; l < 32 / n; l++)
      r |= (ref_lane(o, (a >> (n*l)) & m, (b >> (n*l)) & m, n) & m) << (n*l);
    return r;
  endfunction

endpackage

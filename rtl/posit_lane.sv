// posit_lane: float add/multiply, normalize, round and posit encode for one
// lane of N bits (exponent length ES) of the precision-scalable posit unit.
//
// It receives the lane's operands already decoded (sign, zero flag, scale =
// regime*2^ES + exponent, mantissa 1.frac) together with the mantissa product
// and the scale sum, which the posit unit computes for all lanes at once in
// its shared precision-scalable multiplier and adder. It then
//   - add: aligns the smaller operand (right shift with a sticky bit), adds or
//     subtracts the mantissas, and finds the new leading one;
//   - mul: normalizes the product (it lies in [1,4));
//   - max/min: picks one of the raw operands by comparing the sign-magnitude
//     codes, which are ordered like the values;
// and encodes the result as a posit: regime run, ES exponent bits, fraction,
// rounded to nearest with ties to even on the encoded bit string. Results
// beyond the largest posit saturate to it, non-zero results below the
// smallest posit give the smallest posit (posits never round to zero), an
// exact zero sum gives +0. Combinational.
module posit_lane
  import dpu_pkg::*;
#(
  parameter int unsigned N  = 32,
  parameter int unsigned ES = 6,
  localparam int unsigned F = N - 3 - ES          // widest possible fraction
) (
  input  opcode_e                op,
  input  logic [N-1:0]           raw_a,
  input  logic [N-1:0]           raw_b,
  input  logic                   sign_a,
  input  logic                   sign_b,
  input  logic                   zero_a,
  input  logic                   zero_b,
  input  logic signed [13:0]     scale_a,
  input  logic signed [13:0]     scale_b,
  input  logic [F:0]             mant_a,
  input  logic [F:0]             mant_b,
  input  logic [2*F+1:0]         prod,           // mant_a * mant_b
  input  logic signed [13:0]     scale_sum,      // scale_a + scale_b
  output logic [N-1:0]           y
);

  localparam int unsigned GW = F + 3;            // guard bits of the adder
  localparam int unsigned AW = F + 1 + GW + 1;   // adder width incl. carry bit
  localparam int unsigned FW = AW - 1;           // fraction width into the encoder
  localparam int unsigned TW = N + 1 + ES + FW;  // encoder work width

  // ---------------------------------------------------------------- encoder
  function automatic logic [N-1:0] encode(input logic sgn, input logic signed [13:0] sc,
                                          input logic [FW-1:0] frac);
    logic signed [13:0] kk;
    logic [ES-1:0]      e;
    logic [TW-1:0]      t;
    logic [N-2:0]       body;
    logic               guard, stk;
    int unsigned        runlen;
    kk = sc >>> ES;
    e  = sc[ES-1:0];
    if (kk > $signed(14'(N - 2))) begin
      body = '1;
    end else if (kk < -$signed(14'(N - 2))) begin
      body = (N-1)'(1);
    end else begin
      runlen = (kk >= 0) ? int'(kk) + 1 : int'(-kk);
      t = {(kk >= 0) ? 1'b0 : 1'b1, e, frac, N'(0)};
      t = t >> runlen;
      if (kk >= 0) t = t | ~({TW{1'b1}} >> runlen);
      body  = t[TW-1 -: N-1];
      guard = t[TW-N];
      stk   = |t[TW-N-1:0];
      if (guard && (stk || body[0]) && (body != '1)) body = body + 1'b1;
    end
    return {sgn, body};
  endfunction

  // ---------------------------------------------------------------- adder
  logic                   a_big;
  logic                   s_big;
  logic signed [13:0]     sc_big, sc_small;
  logic [F:0]             m_big, m_small;
  logic [13:0]            d;
  logic [AW-1:0]          xb, xs0, xs, sum;
  logic                   stick;
  logic [$clog2(AW)-1:0]  lead;
  logic [AW-1:0]          norm;
  logic signed [13:0]     sc_add;

  always_comb begin
    a_big    = (scale_a > scale_b) || ((scale_a == scale_b) && (mant_a >= mant_b));
    s_big    = a_big ? sign_a  : sign_b;
    sc_big   = a_big ? scale_a : scale_b;
    sc_small = a_big ? scale_b : scale_a;
    m_big    = a_big ? mant_a  : mant_b;
    m_small  = a_big ? mant_b  : mant_a;
    d        = 14'(sc_big - sc_small);
    xb       = {1'b0, m_big,   GW'(0)};
    xs0      = {1'b0, m_small, GW'(0)};
    if (d >= 14'(AW)) begin
      xs    = '0;
      stick = 1'b1;
    end else begin
      xs    = xs0 >> d;
      stick = |(xs0 & ((AW'(1) << d) - AW'(1)));
    end
    xs  = xs | AW'(stick);
    sum = (sign_a ^ sign_b) ? (xb - xs) : (xb + xs);
    lead = '0;
    for (int j = 0; j < int'(AW); j++) if (sum[j]) lead = j[$clog2(AW)-1:0];
    norm   = sum << (AW - 1 - lead);
    sc_add = sc_big + 14'(lead) - 14'(AW - 2);
  end

  // ---------------------------------------------------------------- result
  logic signed [N:0] key_a, key_b;
  logic              a_ge_b;
  always_comb begin
    key_a  = zero_a ? '0 : (sign_a ? -$signed({2'b00, raw_a[N-2:0]}) : $signed({2'b00, raw_a[N-2:0]}));
    key_b  = zero_b ? '0 : (sign_b ? -$signed({2'b00, raw_b[N-2:0]}) : $signed({2'b00, raw_b[N-2:0]}));
    a_ge_b = key_a >= key_b;
  end

  always_comb begin
    unique case (op)
      OP_ADD: begin
        if (zero_a)        y = raw_b;
        else if (zero_b)   y = raw_a;
        else if (sum == 0) y = '0;
        else               y = encode(s_big, sc_add, norm[AW-2:0]);
      end
      OP_MUL: begin
        if (zero_a || zero_b) y = '0;
        else if (prod[2*F+1]) y = encode(sign_a ^ sign_b, scale_sum + 14'sd1, FW'({prod[2*F:0], (FW-2*F-1)'(0)}));
        else                  y = encode(sign_a ^ sign_b, scale_sum, FW'({prod[2*F-1:0], (FW-2*F)'(0)}));
      end
      OP_MAX:  y = a_ge_b ? raw_a : raw_b;
      OP_MIN:  y = a_ge_b ? raw_b : raw_a;
      default: y = '0;
    endcase
  end

endmodule

// ps_int_mult: precision-scalable integer multiplier, 1x32b, 2x16b or 4x8b.
//
// The 32b multiplier is four 16b multipliers: the two on the diagonal
// (lo*lo, hi*hi) are used in every mode, the two cross products (lo*hi, hi*lo)
// and the adders that merge the partial products are the extra hardware for
// 32b. Each 16b multiplier is made the same way from four 8b multipliers, so
// that in 8b mode only the four diagonal 8b multipliers do work. Unused cross
// multipliers get zero inputs (operand gating), so they do not toggle.
// Products are unsigned. Output layout: 32b mode p = a*b; 16b mode
// p[31:0] = a[15:0]*b[15:0] and p[63:32] = a[31:16]*b[31:16]; 8b mode
// p[16i+15:16i] = a[8i+7:8i]*b[8i+7:8i]. Purely combinational.
module ps_int_mult
  import dpu_pkg::*;
(
  input  prec_e       prec,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [63:0] p
);

  logic full32, full16;
  assign full32 = (prec == PREC_32);
  assign full16 = (prec != PREC_8);

  logic [31:0] p_ll, p_hh, p_lh, p_hl;

  // diagonal 16b multipliers work at 16b in 32b/16b modes and split in 8b mode
  ps_mult16 u_ll (.split(!full16), .a(a[15:0]),  .b(b[15:0]),  .p(p_ll));
  ps_mult16 u_hh (.split(!full16), .a(a[31:16]), .b(b[31:16]), .p(p_hh));
  // cross 16b multipliers: only used for 32b, gated to zero otherwise
  ps_mult16 u_lh (.split(1'b0), .a(full32 ? a[15:0]  : 16'h0), .b(full32 ? b[31:16] : 16'h0), .p(p_lh));
  ps_mult16 u_hl (.split(1'b0), .a(full32 ? a[31:16] : 16'h0), .b(full32 ? b[15:0]  : 16'h0), .p(p_hl));

  always_comb begin
    if (full32) p = {p_hh, p_ll} + ({32'h0, p_lh} << 16) + ({32'h0, p_hl} << 16);
    else        p = {p_hh, p_ll};
  end

endmodule

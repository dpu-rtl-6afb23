// ps_mult16: 16b multiplier made of four 8b multipliers, splittable into two
// independent 8b multipliers (split=1: p = {a[15:8]*b[15:8], a[7:0]*b[7:0]}).
// Building block of ps_int_mult; the cross 8b multipliers are gated to zero
// inputs when split. Purely combinational.
module ps_mult16 (
  input  logic        split,
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [31:0] p
);

  logic [15:0] p_ll, p_hh, p_lh, p_hl;
  logic [7:0]  x_a_lo, x_a_hi, x_b_lo, x_b_hi;

  assign x_a_lo = split ? 8'h0 : a[7:0];
  assign x_a_hi = split ? 8'h0 : a[15:8];
  assign x_b_lo = split ? 8'h0 : b[7:0];
  assign x_b_hi = split ? 8'h0 : b[15:8];

  assign p_ll = a[7:0]  * b[7:0];
  assign p_hh = a[15:8] * b[15:8];
  assign p_lh = x_a_lo * x_b_hi;
  assign p_hl = x_a_hi * x_b_lo;

  always_comb begin
    if (split) p = {p_hh, p_ll};
    else       p = {p_hh, p_ll} + ({16'h0, p_lh} << 8) + ({16'h0, p_hl} << 8);
  end

endmodule
